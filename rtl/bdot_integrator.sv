// bdot_integrator -- integrates the dipole B-dot signal to give the field B.
//
// The B-dot search coil signal is digitised at the FLG sample rate. Each clock
// the sample, less a host-set DC offset, is added to a wide accumulator; the
// accumulator is cleared at every machine frame start, so B is measured from
// its value at the start of the 50 Hz cycle. The field output is the
// accumulator shifted right by OUT_SHIFT and saturated to OUT_W bits.
// Interface: one sample per clock, no valid strobe. Timing: b_field is
// registered and follows the accumulator by one clock.
// The integration itself follows the published design; the clearing at frame
// start, the offset register and the output scaling are this design's choices.
module bdot_integrator #(
  parameter int IN_W      = 14,
  parameter int ACC_W     = 40,
  parameter int OUT_W     = 16,
  parameter int OUT_SHIFT = 18
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    frame_start,
  input  logic signed [IN_W-1:0]  bdot,
  input  logic signed [IN_W-1:0]  offset,
  output logic signed [OUT_W-1:0] b_field
);
  logic signed [ACC_W-1:0] acc;
  logic signed [IN_W:0]    d;
  logic signed [ACC_W-1:0] acc_sh;

  assign d      = (IN_W+1)'(bdot) - (IN_W+1)'(offset);
  assign acc_sh = acc >>> OUT_SHIFT;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      b_field <= '0;
    end else begin
      if (frame_start) acc <= '0;
      else             acc <= acc + ACC_W'(d);
      if (acc_sh > ACC_W'((1 << (OUT_W-1)) - 1))
        b_field <= OUT_W'((1 << (OUT_W-1)) - 1);
      else if (acc_sh < -ACC_W'(1 << (OUT_W-1)))
        b_field <= OUT_W'(-(1 << (OUT_W-1)));
      else
        b_field <= OUT_W'(acc_sh);
    end
  end
endmodule
