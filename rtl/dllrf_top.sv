// dllrf_top -- the digital low level RF system: one frequency law generator
// (FLG) FPGA and N_LO local oscillator (LO) FPGAs in one crate.
//
// The FLG turns the dipole B-dot signal and the beam loop signals into the
// 17-bit frequency increment F_inc and broadcasts it on four shared trigger
// lines, together with the frame start toggle, the pulsed-frame flag and the
// TS2 flag. Each LO FPGA drives one RF cavity: six fundamental (1RF) and four
// second harmonic (2RF) cavities in the full machine, the harmonic being a
// register setting of each LO. Each LO has its own gap volts and wall current
// monitor ADC inputs and its two DAC outputs.
// Clocks: clk_flg (120 MHz) for the FLG and clk_lo (250 MHz) shared by the
// LOs; the trigger lines and flags cross between them asynchronously and are
// synchronised in each LO. Host access: the FLG and the LOs each have a
// register bus in their own clock domain; lo_host_sel picks the LO written.
// Scope buffers are read through a shared read port selected the same way.
// The FPGA partitioning and the trigger-line broadcast follow the published
// system; the buses, clocks and flags are this design's choices.
module dllrf_top
  import llrf_pkg::*;
#(
  parameter int N_LO      = 10,
  parameter int SCOPE_PTS = SCOPE_POINTS
) (
  input  logic                         clk_flg,
  input  logic                         clk_lo,
  input  logic                         rst_n,
  // FLG digitiser and WCM
  input  adc_t                         adc_bdot,
  input  adc_t                         adc_bpl,
  input  adc_t                         adc_bll,
  input  adc_t                         adc_rad,
  input  adc_t                         adc_wcm,
  // machine timing
  input  logic                         frame_start_in,
  input  logic                         ts2_in,
  // LO transceivers
  input  adc_t                         lo_adc0 [N_LO],
  input  adc_t                         lo_adc1 [N_LO],
  output sample_t                      lo_dac0 [N_LO],
  output sample_t                      lo_dac1 [N_LO],
  // host bus to the FLG (clk_flg domain)
  input  logic                         flg_host_we,
  input  logic [15:0]                  flg_host_addr,
  input  logic [31:0]                  flg_host_wdata,
  // host bus to the LOs (clk_lo domain)
  input  logic                         lo_host_we,
  input  logic [$clog2(N_LO)-1:0]      lo_host_sel,
  input  logic [15:0]                  lo_host_addr,
  input  logic [31:0]                  lo_host_wdata,
  // scope read-out
  input  logic [1:0]                   scope_rd_ch,
  input  logic [$clog2(SCOPE_PTS)-1:0] scope_rd_addr,
  output sample_t                      flg_scope_data,
  output logic                         flg_scope_done,
  output sample_t                      lo_scope_data,
  output logic                         lo_scope_done,
  // monitoring
  output logic [N_TRIG_LINES-1:0]      trig,
  output logic [FINC_W-1:0]            flg_finc,
  output logic                         flg_finc_sat,
  output logic [9:0]                   frame_no,
  output logic [15:0]                  beam_phase,
  output logic [SAMPLE_W:0]            beam_mag,
  output sample_t                      flg_aux_flaw,   // FLG auxiliary DAC: frequency law
  output sample_t                      flg_aux_sweep,  // FLG auxiliary DAC: RF sweep
  output logic [FINC_W-1:0]            lo_finc [N_LO],
  output sample_t                      lo_gv_i [N_LO],
  output sample_t                      lo_gv_q [N_LO],
  output sample_t                      lo_pi_i [N_LO],
  output sample_t                      lo_pi_q [N_LO]
);
  logic frame_toggle, pulse_frame, ts2;

  flg_fpga #(.SCOPE_PTS(SCOPE_PTS)) u_flg (
    .clk(clk_flg), .rst_n(rst_n),
    .adc_bdot(adc_bdot), .adc_bpl(adc_bpl), .adc_bll(adc_bll), .adc_rad(adc_rad), .adc_wcm(adc_wcm),
    .frame_start_in(frame_start_in), .ts2_in(ts2_in),
    .host_we(flg_host_we), .host_addr(flg_host_addr), .host_wdata(flg_host_wdata),
    .scope_rd_ch(scope_rd_ch), .scope_rd_addr(scope_rd_addr),
    .scope_rd_data(flg_scope_data), .scope_done(flg_scope_done),
    .trig(trig), .frame_toggle(frame_toggle), .pulse_frame(pulse_frame), .ts2(ts2),
    .finc(flg_finc), .finc_sat(flg_finc_sat), .beam_phase(beam_phase), .beam_mag(beam_mag),
    .frame_no(frame_no), .aux_flaw(flg_aux_flaw), .aux_sweep(flg_aux_sweep)
  );

  sample_t scope_data [N_LO];
  logic    scope_done [N_LO];

  for (genvar n = 0; n < N_LO; n++) begin : g_lo
    lo_fpga #(.SCOPE_PTS(SCOPE_PTS)) u_lo (
      .clk(clk_lo), .rst_n(rst_n), .trig(trig),
      .frame_toggle(frame_toggle), .pulse_frame(pulse_frame), .ts2(ts2),
      .adc0(lo_adc0[n]), .adc1(lo_adc1[n]), .dac0(lo_dac0[n]), .dac1(lo_dac1[n]),
      .host_we(lo_host_we && lo_host_sel == n), .host_addr(lo_host_addr), .host_wdata(lo_host_wdata),
      .scope_rd_ch(scope_rd_ch), .scope_rd_addr(scope_rd_addr),
      .scope_rd_data(scope_data[n]), .scope_done(scope_done[n]),
      .finc(lo_finc[n]), .gv_i(lo_gv_i[n]), .gv_q(lo_gv_q[n]), .pi_i(lo_pi_i[n]), .pi_q(lo_pi_q[n])
    );
  end

  assign lo_scope_data = scope_data[lo_host_sel];
  assign lo_scope_done = scope_done[lo_host_sel];
endmodule
