// iq_demod -- IQ demodulator.
//
// Each valid input sample is multiplied by the reference cosine and sine
// (full scale 32767). The products, doubled, are low-pass filtered by two
// cascaded first-order IIR sections, y += (p - y) / 2^LPF_SHIFT, which remove
// the twice-RF term (with LPF_SHIFT = 6 at 125 MS/s the corner is 310 kHz and
// the 2.6 MHz term of the lowest 1RF frequency is 37 dB down). For x = A cos(wt + phi) against a reference cos(wt), sin(wt)
// the outputs settle to I = A cos(phi) and Q = -A sin(phi), so that
// I cos + Q sin rebuilds x, which is how the IQ modulator uses them.
// Timing: the products are registered with the input strobe, the filter
// sections update on the next two clocks and 'iq_valid' pulses with each
// new I/Q pair, three clocks after 'x_valid'. The demodulator against a (delayed) DDS
// reference follows the published design; the filter is this design's.
module iq_demod
  import llrf_pkg::*;
#(
  parameter int LPF_SHIFT = 6
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t x,
  input  logic    x_valid,
  input  sample_t cos_i,
  input  sample_t sin_i,
  output sample_t i_o,
  output sample_t q_o,
  output logic    iq_valid
);
  localparam int AW = SAMPLE_W + LPF_SHIFT + 2;

  logic signed [31:0] pi_q, pq_q;
  logic               pv, pv2;
  logic signed [AW-1:0] acc_i, acc_q, acc2_i, acc2_q;
  logic signed [AW-1:0] y1_i, y1_q;
  logic signed [AW-1:0] pi_s, pq_s;

  // 2 x cos / 32768: one bit more than a sample, so a full-scale input
  // does not clip before the filter
  assign pi_s = AW'(sat_w(64'(pi_q >>> 14), SAMPLE_W + 1));
  assign pq_s = AW'(sat_w(64'(pq_q >>> 14), SAMPLE_W + 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pi_q     <= '0;
      pq_q     <= '0;
      pv       <= 1'b0;
      acc_i    <= '0;
      acc_q    <= '0;
      pv2      <= 1'b0;
      acc2_i   <= '0;
      acc2_q   <= '0;
      iq_valid <= 1'b0;
    end else begin
      pv <= x_valid;
      if (x_valid) begin
        pi_q <= x * cos_i;
        pq_q <= x * sin_i;
      end
      pv2      <= pv;
      iq_valid <= pv2;
      if (pv) begin
        acc_i <= acc_i + pi_s - (acc_i >>> LPF_SHIFT);
        acc_q <= acc_q + pq_s - (acc_q >>> LPF_SHIFT);
      end
      if (pv2) begin
        acc2_i <= acc2_i + y1_i - (acc2_i >>> LPF_SHIFT);
        acc2_q <= acc2_q + y1_q - (acc2_q >>> LPF_SHIFT);
      end
    end
  end

  assign y1_i = acc_i >>> LPF_SHIFT;
  assign y1_q = acc_q >>> LPF_SHIFT;
  assign i_o  = sample_t'(sat_w(64'(acc2_i >>> LPF_SHIFT), SAMPLE_W));
  assign q_o  = sample_t'(sat_w(64'(acc2_q >>> LPF_SHIFT), SAMPLE_W));
endmodule
