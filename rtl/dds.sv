// dds -- direct digital synthesiser for the RF sweep and the demodulator
// references.
//
// A PHASE_W-bit phase accumulator advances each clock by F_inc * FINC_MULT,
// so the output frequency is F_inc * FINC_MULT * f_clk / 2^PHASE_W. With the
// defaults (FINC_MULT = 768 at the 250 MHz LO clock, or 1600 at the 120 MHz
// FLG clock) one F_inc step is 44.7 Hz in both FPGAs, so the FLG and the LOs
// generate exactly the same frequency from the same word.
// The accumulated phase can be delayed by 'delay' clocks (the "delayed DDS"
// that supplies the demodulator reference; delay = 0 bypasses the delay line),
// doubled for the second harmonic cavities ('harmonic2', the frequency
// doubler) and offset by 'phase_ofs' (16 bits per turn: the theta phase and
// the cavity phase offset). The top LUT_AW bits of the phase address a
// 2^LUT_AW-entry sine table; the cosine reads the same table a quarter turn
// ahead. Timing: cos_o / sin_o are registered, two clocks after the phase
// (plus the delay). The DDS stepped by F_inc through a look-up table, the
// doubler and the phase offset follow the published design; the widths, the
// scale and the table size are this design's choices.
module dds
  import llrf_pkg::*;
#(
  parameter int FINC_MULT   = 768,
  parameter int LUT_AW      = 10,
  parameter int MAX_DELAY_W = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [FINC_W-1:0]      finc,
  input  logic                   harmonic2,
  input  logic [15:0]            phase_ofs,
  input  logic [MAX_DELAY_W-1:0] delay,
  output sample_t                cos_o,
  output sample_t                sin_o,
  output phase_t                 phase_o
);
  localparam int N = 2**LUT_AW;

  phase_t  acc;
  phase_t  acc_d;
  phase_t  ph;
  phase_t  acc_dl;
  sample_t sine [N];

  // sine table, amplitude 32767
  initial begin
    for (int k = 0; k < N; k++)
      sine[k] = sample_t'($rtoi($floor(32767.0 * $sin(6.283185307179586 * k / N) + 0.5)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else        acc <= acc + PHASE_W'(finc) * PHASE_W'(FINC_MULT);
  end

  delay_line #(.W(PHASE_W), .DEPTH_W(MAX_DELAY_W)) u_dly (
    .clk(clk), .din(acc), .delay(delay), .dout(acc_dl)
  );

  assign acc_d = (delay == '0) ? acc : acc_dl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ph <= '0;
    else        ph <= (harmonic2 ? (acc_d << 1) : acc_d) + {phase_ofs, 16'h0000};
  end

  logic [LUT_AW-1:0] idx;
  assign idx = ph[PHASE_W-1 -: LUT_AW];

  always_ff @(posedge clk) begin
    sin_o   <= sine[idx];
    cos_o   <= sine[idx + LUT_AW'(N / 4)];
    phase_o <= ph;
  end
endmodule
