// bandpass_filter -- band-pass filter on the beam phase signal.
//
// A first-order high-pass (the input less its slow running mean, time
// constant 2^HP_SHIFT samples) removes the steady phase, leaving the
// oscillation of the beam about it; a first-order low-pass (time constant
// 2^LP_SHIFT samples) then removes noise above the band. The result, 'y',
// is the correction the digital beam phase loop adds to F_inc. Both filters
// update on 'x_valid'; 'y' changes one clock later.
// Only the filter's place after the CORDIC is published; its form and
// corner frequencies are this design's choices.
module bandpass_filter
  import llrf_pkg::*;
#(
  parameter int HP_SHIFT = 10,
  parameter int LP_SHIFT = 3
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t x,
  input  logic    x_valid,
  output sample_t y
);
  logic signed [SAMPLE_W+HP_SHIFT+1:0] hp_acc;
  logic signed [SAMPLE_W+LP_SHIFT+2:0] lp_acc;
  logic signed [SAMPLE_W+1:0]          hp;

  assign hp = (SAMPLE_W+2)'(x) - (SAMPLE_W+2)'(hp_acc >>> HP_SHIFT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hp_acc <= '0;
      lp_acc <= '0;
    end else if (x_valid) begin
      hp_acc <= hp_acc + $bits(hp_acc)'(x) - (hp_acc >>> HP_SHIFT);
      lp_acc <= lp_acc + $bits(lp_acc)'(hp) - (lp_acc >>> LP_SHIFT);
    end
  end

  assign y = sample_t'(sat_w(64'(lp_acc >>> LP_SHIFT), SAMPLE_W));
endmodule
