// iq_mod -- IQ modulator: y = I cos + Q sin.
//
// Two signed multipliers and an adder turn the I and Q amplitudes back into
// an RF signal on the DDS sweep (cos and sin have full scale 32767). The
// products are registered, then summed, scaled by 2^-15 and saturated to
// 16 bits: two clocks of latency. The multiply-and-add structure is the one
// printed for both DAC paths of the LO FPGA diagram; the pipelining and the
// saturation are this design's choices.
module iq_mod
  import llrf_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t i_i,
  input  sample_t q_i,
  input  sample_t cos_i,
  input  sample_t sin_i,
  output sample_t y
);
  logic signed [31:0] pc, ps;
  logic signed [32:0] s;

  assign s = 33'(pc) + 33'(ps);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0;
      ps <= '0;
      y  <= '0;
    end else begin
      pc <= i_i * cos_i;
      ps <= q_i * sin_i;
      y  <= sample_t'(sat_w(64'(s >>> 15), SAMPLE_W));
    end
  end
endmodule
