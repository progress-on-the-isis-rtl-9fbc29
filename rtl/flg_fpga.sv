// flg_fpga -- the frequency law generator (FLG) FPGA.
//
// Data path: the digitised dipole B-dot signal is integrated to the field B,
// which addresses the frequency law table to give the F_inc word. The F_inc
// summing block adds the scaled frequency law trim profile and the scaled
// beam phase (input 1), bunch length (input 2) and radial (input 3) loop
// signals to the law (input 4). The sum is broadcast to all LO FPGAs on four
// trigger lines. In parallel the digital beam phase detector mixes the wall
// current monitor (WCM) signal with a delayed DDS reference driven by the
// same F_inc, converts I/Q to phase with a CORDIC and band-pass filters it;
// register FLG_MODE bit 0 selects this digital beam phase loop in place of
// the digitised analogue one at input 1 of the sum. Two auxiliary DAC
// outputs carry the frequency law signal (the summed F_inc divided by 4 to fit a
// 16-bit DAC word, for the beam intensity monitor) and an RF sweep made by a
// DDS from the summed F_inc (for extraction timing); the published system
// names both uses of its extra DAC channels but not their formats, which are
// this design's choice. The FPGA also counts
// machine frames and passes the frame start, pulsed-frame and TS2 flags to
// the LOs, and records four selectable signals in a virtual scope.
// Interface: ADC samples, one per clock at the 120 MHz FLG clock; a host
// register bus (llrf_pkg register map); scope read port; trigger lines and
// frame flags out. Latency from a B-dot sample to the trigger lines: the
// integrator, table and sum take 3 clocks, then the word waits for the next
// frame of the trigger-line link (at most 8 beats, 400 ns) and takes 6 beats
// to send. The block structure follows the published FLG diagram; the
// register map, the timing flags and the beam phase loop select are this
// design's choices.
module flg_fpga
  import llrf_pkg::*;
#(
  parameter int CLK_PER_BIT = 6,     // 120 MHz / 20 MHz trigger-line bit clock
  parameter int FINC_MULT   = 1600,  // 44.7 Hz per F_inc step at 120 MHz
  parameter int LUT_AW      = 12,
  parameter int PROF_W      = 10,
  parameter int SCOPE_PTS   = SCOPE_POINTS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // digitiser channels 0..3 and the wall current monitor
  input  adc_t                        adc_bdot,
  input  adc_t                        adc_bpl,
  input  adc_t                        adc_bll,
  input  adc_t                        adc_rad,
  input  adc_t                        adc_wcm,
  // machine timing
  input  logic                        frame_start_in,
  input  logic                        ts2_in,
  // host register bus
  input  logic                        host_we,
  input  logic [15:0]                 host_addr,
  input  logic [31:0]                 host_wdata,
  input  logic [1:0]                  scope_rd_ch,
  input  logic [$clog2(SCOPE_PTS)-1:0] scope_rd_addr,
  output sample_t                     scope_rd_data,
  output logic                        scope_done,
  // to the LO FPGAs
  output logic [N_TRIG_LINES-1:0]     trig,
  output logic                        frame_toggle,
  output logic                        pulse_frame,
  output logic                        ts2,
  // monitoring
  output logic [FINC_W-1:0]           finc,
  output logic                        finc_sat,
  output logic [15:0]                 beam_phase,
  output logic [SAMPLE_W:0]           beam_mag,
  output logic [9:0]                  frame_no,
  // auxiliary DAC channels
  output sample_t                     aux_flaw,    // frequency law signal
  output sample_t                     aux_sweep    // RF sweep for extraction timing
);
  // ---------------- host registers ----------------
  sample_t     gain_bpl, gain_bll, gain_rad, gain_trim, wcm_scale;
  adc_t        bdot_ofs;
  logic [7:0]  mode;
  logic [15:0] step_cycles, scope_dec;
  logic [9:0]  pulse_div;
  logic [7:0]  wcm_delay;
  logic [11:0] scope_sel;

  logic [3:0] region;
  assign region = host_addr[15:12];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gain_bpl    <= '0;
      gain_bll    <= '0;
      gain_rad    <= '0;
      gain_trim   <= '0;
      bdot_ofs    <= '0;
      mode        <= '0;
      step_cycles <= 16'd1;
      pulse_div   <= 10'd1;
      wcm_delay   <= '0;
      scope_sel   <= {3'd3, 3'd2, 3'd1, 3'd0};
      scope_dec   <= 16'd1;
      wcm_scale   <= 16'sd4096;
    end else if (host_we && region == REG_CTRL) begin
      case (host_addr[7:0])
        FLG_GAIN_BPL:  gain_bpl    <= host_wdata[15:0];
        FLG_GAIN_BLL:  gain_bll    <= host_wdata[15:0];
        FLG_GAIN_RAD:  gain_rad    <= host_wdata[15:0];
        FLG_GAIN_TRIM: gain_trim   <= host_wdata[15:0];
        FLG_BDOT_OFS:  bdot_ofs    <= host_wdata[ADC_W-1:0];
        FLG_MODE:      mode        <= host_wdata[7:0];
        FLG_STEP:      step_cycles <= host_wdata[15:0];
        FLG_PULSE_DIV: pulse_div   <= host_wdata[9:0];
        FLG_WCM_DELAY: wcm_delay   <= host_wdata[7:0];
        FLG_SCOPE_SEL: scope_sel   <= host_wdata[11:0];
        FLG_SCOPE_DEC: scope_dec   <= host_wdata[15:0];
        FLG_WCM_SCALE: wcm_scale   <= host_wdata[15:0];
        default: ;
      endcase
    end
  end

  // ---------------- frame timing ----------------
  logic       frame_start;

  frame_timing #(.FRAMES(640)) u_timing (
    .clk(clk), .rst_n(rst_n), .frame_start_in(frame_start_in), .ts2_in(ts2_in),
    .pulse_div(pulse_div), .frame_start(frame_start), .frame_toggle(frame_toggle),
    .frame_no(frame_no), .pulse_frame(pulse_frame), .ts2(ts2)
  );

  // ---------------- frequency law ----------------
  sample_t           b_field;
  logic [FINC_W-1:0] finc_law;
  sample_t           trim;

  bdot_integrator #(.IN_W(ADC_W), .OUT_W(SAMPLE_W)) u_integ (
    .clk(clk), .rst_n(rst_n), .frame_start(frame_start), .bdot(adc_bdot),
    .offset(bdot_ofs), .b_field(b_field)
  );

  freq_law_lut #(.B_W(SAMPLE_W), .ADDR_W(LUT_AW), .FINC_W(FINC_W)) u_lut (
    .clk(clk), .b_field(b_field),
    .wr_en(host_we && region == REG_LUT), .wr_addr(host_addr[LUT_AW-1:0]),
    .wr_data(host_wdata[FINC_W-1:0]), .finc_law(finc_law)
  );

  function_gen #(.LEN_W(PROF_W)) u_trim (
    .clk(clk), .rst_n(rst_n), .frame_start(frame_start),
    .wr_en(host_we && region == REG_PROF0), .wr_addr(host_addr[PROF_W-1:0]),
    .wr_data(host_wdata[15:0]), .step_cycles(step_cycles), .value(trim)
  );

  // ---------------- digital beam phase detector ----------------
  sample_t wcm_s, ref_cos, ref_sin, beam_i, beam_q, bpl_digital;
  logic    wcm_v, iq_v, ph_v;

  adc_decim #(.DECIM(1), .IN_W(ADC_W)) u_wcm_in (
    .clk(clk), .rst_n(rst_n), .adc(adc_wcm), .scale(wcm_scale), .dout(wcm_s), .dvalid(wcm_v)
  );

  dds #(.FINC_MULT(FINC_MULT)) u_ref (
    .clk(clk), .rst_n(rst_n), .finc(finc), .harmonic2(1'b0), .phase_ofs(16'h0000),
    .delay(wcm_delay), .cos_o(ref_cos), .sin_o(ref_sin), .phase_o()
  );

  iq_demod u_bpl_demod (
    .clk(clk), .rst_n(rst_n), .x(wcm_s), .x_valid(wcm_v), .cos_i(ref_cos), .sin_i(ref_sin),
    .i_o(beam_i), .q_o(beam_q), .iq_valid(iq_v)
  );

  cordic u_cordic (
    .clk(clk), .rst_n(rst_n), .i_i(beam_i), .q_i(beam_q), .in_valid(iq_v),
    .phase(beam_phase), .mag(beam_mag), .out_valid(ph_v)
  );

  bandpass_filter u_bpf (
    .clk(clk), .rst_n(rst_n), .x(beam_phase), .x_valid(ph_v), .y(bpl_digital)
  );

  // ---------------- F_inc sum and broadcast ----------------
  sample_t loop1;
  assign loop1 = mode[0] ? bpl_digital : sample_t'(adc_bpl) <<< 2;

  finc_sum u_sum (
    .clk(clk), .rst_n(rst_n), .finc_law(finc_law),
    .loop_bpl(loop1), .loop_bll(sample_t'(adc_bll) <<< 2), .loop_rad(sample_t'(adc_rad) <<< 2),
    .trim(trim), .gain_bpl(gain_bpl), .gain_bll(gain_bll), .gain_rad(gain_rad),
    .gain_trim(gain_trim), .finc(finc), .sat(finc_sat)
  );

  trigline_tx #(.CLK_PER_BIT(CLK_PER_BIT)) u_tx (
    .clk(clk), .rst_n(rst_n), .finc(finc), .trig(trig), .sent()
  );

  // ---------------- auxiliary DAC outputs ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) aux_flaw <= '0;
    else        aux_flaw <= sample_t'(finc[FINC_W-1:2]);

  dds #(.FINC_MULT(FINC_MULT)) u_sweep (
    .clk(clk), .rst_n(rst_n), .finc(finc), .harmonic2(1'b0), .phase_ofs(16'h0000),
    .delay(8'd0), .cos_o(aux_sweep), .sin_o(), .phase_o()
  );

  // ---------------- virtual scope ----------------
  sample_t src [SCOPE_SRC];
  assign src[0] = sample_t'(adc_bdot) <<< 2;
  assign src[1] = b_field;
  assign src[2] = sample_t'(finc_law[FINC_W-1:2]);
  assign src[3] = sample_t'(finc[FINC_W-1:2]);
  assign src[4] = trim;
  assign src[5] = beam_i;
  assign src[6] = sample_t'(beam_phase);
  assign src[7] = bpl_digital;

  vscope #(.POINTS(SCOPE_PTS)) u_scope (
    .clk(clk), .rst_n(rst_n), .src(src), .sel(scope_sel), .decim(scope_dec),
    .trigger(frame_start), .rd_ch(scope_rd_ch), .rd_addr(scope_rd_addr),
    .rd_data(scope_rd_data), .done(scope_done)
  );
endmodule
