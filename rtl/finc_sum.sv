// finc_sum -- the F_inc summing stage of the frequency law generator.
//
// The frequency law word from the look-up table is added to scaled copies of
// the beam phase loop, bunch length loop and radial loop signals (inputs 1 to
// 3 of the summing block, input 4 being the frequency law) and of the
// frequency law trim function. Each gain is a signed 16-bit number with
// GAIN_SHIFT fractional bits. The sum saturates to the unsigned FINC_W-bit
// range; 'sat' flags a clipped result. Timing: registered, one clock.
// Summing the law with scaled trim and loop signals follows the published
// design; the gain format and the saturation are this design's choices.
module finc_sum
  import llrf_pkg::*;
#(
  parameter int GAIN_SHIFT = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [FINC_W-1:0]   finc_law,
  input  sample_t             loop_bpl,
  input  sample_t             loop_bll,
  input  sample_t             loop_rad,
  input  sample_t             trim,
  input  sample_t             gain_bpl,
  input  sample_t             gain_bll,
  input  sample_t             gain_rad,
  input  sample_t             gain_trim,
  output logic [FINC_W-1:0]   finc,
  output logic                sat
);
  logic signed [35:0] corr;
  logic signed [35:0] total;

  always_comb begin
    corr  = 36'(loop_bpl * gain_bpl) + 36'(loop_bll * gain_bll)
          + 36'(loop_rad * gain_rad) + 36'(trim * gain_trim);
    total = 36'($signed({1'b0, finc_law})) + (corr >>> GAIN_SHIFT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      finc <= '0;
      sat  <= 1'b0;
    end else if (total < 0) begin
      finc <= '0;
      sat  <= 1'b1;
    end else if (total > 36'((1 << FINC_W) - 1)) begin
      finc <= '1;
      sat  <= 1'b1;
    end else begin
      finc <= FINC_W'(total);
      sat  <= 1'b0;
    end
  end
endmodule
