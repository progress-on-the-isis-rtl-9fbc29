// lo_fpga -- local oscillator and digital IQ cavity loop FPGA, one per RF
// cavity.
//
// The F_inc word arrives on the trigger lines and steps three DDS: one makes
// the RF sweep that is modulated for the DACs, two "delayed" ones make the
// demodulator references for the gap volts and the wall current monitor
// (WCM), each with its own delay to match the signal's path. All three carry
// the cavity's phase offset plus the theta phase profile, and for a second
// harmonic (2RF) cavity the phase is doubled (LO_MODE bit 1).
// The gap volts signal is decimated, scaled and demodulated; its I and Q are
// the process variables of two PI loops. The Q setpoint is zero and the I
// setpoint is the amplitude demand profile times a scale register (or an
// alternate scale on pulsed or TS2 frames, LO_MODE bits 3 and 4). LO_MODE
// bit 0 closes the loops; open loop passes the setpoints straight out.
// The WCM signal is demodulated the same way to give the beam I and Q, which
// are added to the PI outputs when beam feed-forward is on (LO_MODE bit 2);
// the sums IQ-modulate the sweep for DAC 0, the cavity drive. The PI outputs
// alone modulate the sweep for DAC 1, through a pipeline delay, as the
// reference for the analogue cavity tuning loop.
// Interface: ADC samples one per clock at the 250 MHz LO clock; trigger lines
// and frame flags from the FLG (asynchronous, synchronised here); a host
// register bus (llrf_pkg map); scope read port; DAC samples out.
// Timing: DAC 0 follows the DDS by two clocks (IQ modulator). The loop
// update rate is the decimated sample rate, 125 MS/s by default. The
// structure follows the published LO diagram; number formats, register
// map and mode bits are this design's choices.
module lo_fpga
  import llrf_pkg::*;
#(
  parameter int CLK_PER_BIT = 12,   // 250 MHz / 20 MHz, rounded down
  parameter int FINC_MULT   = 768,  // 44.7 Hz per F_inc step at 250 MHz
  parameter int DECIM       = 2,
  parameter int PROF_W      = 10,
  parameter int SCOPE_PTS   = SCOPE_POINTS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N_TRIG_LINES-1:0]      trig,
  input  logic                         frame_toggle,
  input  logic                         pulse_frame,
  input  logic                         ts2,
  input  adc_t                         adc0,        // gap volts
  input  adc_t                         adc1,        // wall current monitor
  output sample_t                      dac0,        // to the RF cavity
  output sample_t                      dac1,        // to the tuning loop
  input  logic                         host_we,
  input  logic [15:0]                  host_addr,
  input  logic [31:0]                  host_wdata,
  input  logic [1:0]                   scope_rd_ch,
  input  logic [$clog2(SCOPE_PTS)-1:0] scope_rd_addr,
  output sample_t                      scope_rd_data,
  output logic                         scope_done,
  // monitoring
  output logic [FINC_W-1:0]            finc,
  output sample_t                      gv_i,
  output sample_t                      gv_q,
  output sample_t                      pi_i,
  output sample_t                      pi_q
);
  // ---------------- host registers ----------------
  logic [7:0]  mode;
  logic [15:0] phase_ofs, step_cycles, scope_dec;
  sample_t     kp_i, ki_i, kp_q, ki_q, demand_sc, demand_alt, gv_scale, wcm_scale;
  logic [7:0]  gv_delay, wcm_delay, out_delay;
  logic [11:0] scope_sel;
  logic [3:0]  region;

  assign region = host_addr[15:12];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode        <= '0;
      phase_ofs   <= '0;
      kp_i        <= '0;
      ki_i        <= '0;
      kp_q        <= '0;
      ki_q        <= '0;
      demand_sc   <= 16'sd4096;
      demand_alt  <= 16'sd4096;
      gv_scale    <= 16'sd4096;
      wcm_scale   <= 16'sd4096;
      gv_delay    <= '0;
      wcm_delay   <= '0;
      out_delay   <= '0;
      step_cycles <= 16'd1;
      scope_sel   <= {3'd3, 3'd2, 3'd1, 3'd0};
      scope_dec   <= 16'd1;
    end else if (host_we && region == REG_CTRL) begin
      case (host_addr[7:0])
        LO_MODE:       mode        <= host_wdata[7:0];
        LO_PHASE_OFS:  phase_ofs   <= host_wdata[15:0];
        LO_KP_I:       kp_i        <= host_wdata[15:0];
        LO_KI_I:       ki_i        <= host_wdata[15:0];
        LO_KP_Q:       kp_q        <= host_wdata[15:0];
        LO_KI_Q:       ki_q        <= host_wdata[15:0];
        LO_DEMAND_SC:  demand_sc   <= host_wdata[15:0];
        LO_DEMAND_ALT: demand_alt  <= host_wdata[15:0];
        LO_GV_SCALE:   gv_scale    <= host_wdata[15:0];
        LO_WCM_SCALE:  wcm_scale   <= host_wdata[15:0];
        LO_GV_DELAY:   gv_delay    <= host_wdata[7:0];
        LO_WCM_DELAY:  wcm_delay   <= host_wdata[7:0];
        LO_OUT_DELAY:  out_delay   <= host_wdata[7:0];
        LO_STEP:       step_cycles <= host_wdata[15:0];
        LO_SCOPE_SEL:  scope_sel   <= host_wdata[11:0];
        LO_SCOPE_DEC:  scope_dec   <= host_wdata[15:0];
        default: ;
      endcase
    end
  end

  logic closed_loop, harmonic2, beam_ff, alt_on_pulse, alt_on_ts2;
  assign closed_loop  = mode[0];
  assign harmonic2    = mode[1];
  assign beam_ff      = mode[2];
  assign alt_on_pulse = mode[3];
  assign alt_on_ts2   = mode[4];

  // ---------------- timing from the FLG (asynchronous) ----------------
  logic [2:0] tog_s;
  logic [1:0] pulse_s, ts2_s;
  logic       frame_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tog_s   <= '0;
      pulse_s <= '0;
      ts2_s   <= '0;
    end else begin
      tog_s   <= {tog_s[1:0], frame_toggle};
      pulse_s <= {pulse_s[0], pulse_frame};
      ts2_s   <= {ts2_s[0], ts2};
    end
  end
  assign frame_start = tog_s[2] ^ tog_s[1];

  // ---------------- F_inc receiver and profiles ----------------
  logic    finc_valid;
  sample_t theta, demand;

  trigline_rx #(.CLK_PER_BIT(CLK_PER_BIT)) u_rx (
    .clk(clk), .rst_n(rst_n), .trig(trig), .finc(finc), .finc_valid(finc_valid)
  );

  function_gen #(.LEN_W(PROF_W)) u_theta (
    .clk(clk), .rst_n(rst_n), .frame_start(frame_start),
    .wr_en(host_we && region == REG_PROF0), .wr_addr(host_addr[PROF_W-1:0]),
    .wr_data(host_wdata[15:0]), .step_cycles(step_cycles), .value(theta)
  );

  function_gen #(.LEN_W(PROF_W)) u_demand (
    .clk(clk), .rst_n(rst_n), .frame_start(frame_start),
    .wr_en(host_we && region == REG_PROF1), .wr_addr(host_addr[PROF_W-1:0]),
    .wr_data(host_wdata[15:0]), .step_cycles(step_cycles), .value(demand)
  );

  // ---------------- DDS: sweep and delayed references ----------------
  logic [15:0] ph_total;
  sample_t     out_cos, out_sin, gv_cos, gv_sin, wcm_cos, wcm_sin;

  assign ph_total = phase_ofs + 16'(theta);

  dds #(.FINC_MULT(FINC_MULT)) u_dds_out (
    .clk(clk), .rst_n(rst_n), .finc(finc), .harmonic2(harmonic2), .phase_ofs(ph_total),
    .delay(8'd0), .cos_o(out_cos), .sin_o(out_sin), .phase_o()
  );
  dds #(.FINC_MULT(FINC_MULT)) u_dds_gv (
    .clk(clk), .rst_n(rst_n), .finc(finc), .harmonic2(harmonic2), .phase_ofs(ph_total),
    .delay(gv_delay), .cos_o(gv_cos), .sin_o(gv_sin), .phase_o()
  );
  dds #(.FINC_MULT(FINC_MULT)) u_dds_wcm (
    .clk(clk), .rst_n(rst_n), .finc(finc), .harmonic2(harmonic2), .phase_ofs(ph_total),
    .delay(wcm_delay), .cos_o(wcm_cos), .sin_o(wcm_sin), .phase_o()
  );

  // ---------------- gap volts: decimate, demodulate, PI ----------------
  sample_t gv_s, wcm_s, beam_i, beam_q, sp_i;
  logic    gv_v, wcm_v, gv_iq_v, wcm_iq_v;

  adc_decim #(.DECIM(DECIM), .IN_W(ADC_W)) u_gv_in (
    .clk(clk), .rst_n(rst_n), .adc(adc0), .scale(gv_scale), .dout(gv_s), .dvalid(gv_v)
  );
  iq_demod u_gv_demod (
    .clk(clk), .rst_n(rst_n), .x(gv_s), .x_valid(gv_v), .cos_i(gv_cos), .sin_i(gv_sin),
    .i_o(gv_i), .q_o(gv_q), .iq_valid(gv_iq_v)
  );

  // I setpoint: scaled amplitude demand profile
  logic               use_alt;
  logic signed [31:0] sp_prod;
  assign use_alt = (alt_on_pulse && pulse_s[1]) || (alt_on_ts2 && ts2_s[1]);
  assign sp_prod = 32'(demand) * 32'(use_alt ? demand_alt : demand_sc);
  assign sp_i    = sample_t'(sat_w(64'(sp_prod >>> 12), SAMPLE_W));

  pi_ctrl u_pi_i (
    .clk(clk), .rst_n(rst_n), .setpoint(sp_i), .pv(gv_i), .pv_valid(gv_iq_v),
    .kp(kp_i), .ki(ki_i), .closed_loop(closed_loop), .u(pi_i)
  );
  pi_ctrl u_pi_q (
    .clk(clk), .rst_n(rst_n), .setpoint(16'sd0), .pv(gv_q), .pv_valid(gv_iq_v),
    .kp(kp_q), .ki(ki_q), .closed_loop(closed_loop), .u(pi_q)
  );

  // ---------------- beam feed-forward (WCM) ----------------
  adc_decim #(.DECIM(DECIM), .IN_W(ADC_W)) u_wcm_in (
    .clk(clk), .rst_n(rst_n), .adc(adc1), .scale(wcm_scale), .dout(wcm_s), .dvalid(wcm_v)
  );
  iq_demod u_wcm_demod (
    .clk(clk), .rst_n(rst_n), .x(wcm_s), .x_valid(wcm_v), .cos_i(wcm_cos), .sin_i(wcm_sin),
    .i_o(beam_i), .q_o(beam_q), .iq_valid(wcm_iq_v)
  );

  sample_t drv_i, drv_q;
  always_comb begin
    drv_i = pi_i;
    drv_q = pi_q;
    if (beam_ff) begin
      drv_i = sample_t'(sat_w(64'(pi_i) + 64'(beam_i), SAMPLE_W));
      drv_q = sample_t'(sat_w(64'(pi_q) + 64'(beam_q), SAMPLE_W));
    end
  end

  // ---------------- modulators and DACs ----------------
  sample_t tune_rf;

  iq_mod u_mod_drive (
    .clk(clk), .rst_n(rst_n), .i_i(drv_i), .q_i(drv_q), .cos_i(out_cos), .sin_i(out_sin), .y(dac0)
  );
  iq_mod u_mod_tune (
    .clk(clk), .rst_n(rst_n), .i_i(pi_i), .q_i(pi_q), .cos_i(out_cos), .sin_i(out_sin), .y(tune_rf)
  );
  delay_line #(.W(SAMPLE_W), .DEPTH_W(8)) u_out_delay (
    .clk(clk), .din(tune_rf), .delay(out_delay), .dout(dac1)
  );

  // ---------------- virtual scope ----------------
  sample_t src [SCOPE_SRC];
  assign src[0] = gv_s;
  assign src[1] = gv_i;
  assign src[2] = gv_q;
  assign src[3] = pi_i;
  assign src[4] = pi_q;
  assign src[5] = beam_i;
  assign src[6] = beam_q;
  assign src[7] = sp_i;

  vscope #(.POINTS(SCOPE_PTS)) u_scope (
    .clk(clk), .rst_n(rst_n), .src(src), .sel(scope_sel), .decim(scope_dec),
    .trigger(frame_start), .rd_ch(scope_rd_ch), .rd_addr(scope_rd_addr),
    .rd_data(scope_rd_data), .done(scope_done)
  );
endmodule
