// tb_dllrf_top -- the whole system at its default size: the FLG FPGA and ten
// LO FPGAs (six 1RF, four 2RF), each LO closing its IQ loops around a
// behavioural cavity (a delay and a gain of 0.6).
//
// One machine frame is run: the host loads the frequency law table, the
// profiles and the loop settings; a frame start restarts the B-dot
// integration; B-dot ramps the field, so F_inc sweeps up, and every LO must
// receive the FLG's words over the trigger lines. The test checks that each
// cavity's gap volts I settles to its demand and Q to zero while the
// frequency sweeps, that the 2RF cavities run at twice the frequency of the
// 1RF ones, that the beam feed-forward on LO 0 acts, that pulsed frames
// switch LO 1 to its alternate demand, that the digital beam phase loop can
// be selected, that F_inc saturates, and that both kinds of scope capture
// 10000 points. It counts how often each of these mechanisms happened and
// fails any that never did. It also watches the FLG's auxiliary frequency
// law and RF sweep outputs.
module tb_dllrf_top;
  import llrf_pkg::*;
  localparam int N_LO = 10;
  logic clk_flg = 0, clk_lo = 0, rst_n = 0;
  adc_t adc_bdot = '0, adc_bpl = '0, adc_bll = '0, adc_rad = '0, adc_wcm = '0;
  logic frame_start_in = 0, ts2_in = 0;
  adc_t lo_adc0 [N_LO], lo_adc1 [N_LO];
  sample_t lo_dac0 [N_LO], lo_dac1 [N_LO];
  logic flg_host_we = 0, lo_host_we = 0;
  logic [15:0] flg_host_addr = '0, lo_host_addr = '0;
  logic [31:0] flg_host_wdata = '0, lo_host_wdata = '0;
  logic [3:0] lo_host_sel = '0;
  logic [1:0] scope_rd_ch = '0;
  logic [13:0] scope_rd_addr = '0;
  sample_t flg_scope_data, lo_scope_data;
  logic flg_scope_done, lo_scope_done;
  logic [3:0] trig;
  logic [16:0] flg_finc;
  logic flg_finc_sat;
  logic [9:0] frame_no;
  logic [15:0] beam_phase;
  logic [16:0] beam_mag;
  sample_t flg_aux_flaw, flg_aux_sweep;
  logic [16:0] lo_finc [N_LO];
  sample_t lo_gv_i [N_LO], lo_gv_q [N_LO], lo_pi_i [N_LO], lo_pi_q [N_LO];
  int checks = 0, failures = 0;
  localparam real TWO_PI = 6.283185307179586;

  // mechanism counters
  int n_aux = 0, n_words = 0, n_loops_locked = 0, n_2rf = 0, n_ff = 0, n_pulse = 0, n_bpl = 0, n_sat = 0, n_scope = 0;

  always #4167ps clk_flg = ~clk_flg;
  always #2000ps clk_lo  = ~clk_lo;

  dllrf_top dut (.*);

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  task automatic flg_wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk_flg); flg_host_we = 1; flg_host_addr = a; flg_host_wdata = d;
    @(negedge clk_flg); flg_host_we = 0;
  endtask
  task automatic lo_wr(input int n, input logic [15:0] a, input logic [31:0] d);
    @(negedge clk_lo); lo_host_we = 1; lo_host_sel = 4'(n); lo_host_addr = a; lo_host_wdata = d;
    @(negedge clk_lo); lo_host_we = 0;
  endtask

  // ---- behavioural cavities and beam ----
  localparam int CAV_DLY = 20;
  sample_t dq [N_LO][CAV_DLY];
  real wcm_amp = 0.0;
  real ph [N_LO];
  always @(posedge clk_lo) begin
    for (int n = 0; n < N_LO; n++) begin
      for (int k = CAV_DLY - 1; k > 0; k--) dq[n][k] <= dq[n][k-1];
      dq[n][0] <= lo_dac0[n];
      ph[n] <= ph[n] + TWO_PI * real'(lo_finc[n]) * 768.0 / 4294967296.0 * ((n >= 6) ? 2.0 : 1.0);
    end
  end
  always_comb
    for (int n = 0; n < N_LO; n++) begin
      lo_adc0[n] = adc_t'($rtoi(0.6 * real'(dq[n][CAV_DLY-1]) / 4.0));
      lo_adc1[n] = adc_t'($rtoi(wcm_amp * $cos(ph[n])));
    end
  initial for (int n = 0; n < N_LO; n++) begin
    ph[n] = 0.0;
    for (int k = 0; k < CAV_DLY; k++) dq[n][k] = '0;
  end

  // every LO must receive exactly the words the FLG sends
  logic [16:0] recent [64];
  int rx_bad = 0;
  int lo_words [N_LO];
  initial for (int n = 0; n < N_LO; n++) lo_words[n] = 0;
  always @(posedge clk_flg) begin
    for (int k = 63; k > 0; k--) recent[k] <= recent[k-1];
    recent[0] <= flg_finc;
  end
  logic [16:0] lo_finc_d [N_LO];
  always @(posedge clk_lo)
    for (int n = 0; n < N_LO; n++) begin
      lo_finc_d[n] <= lo_finc[n];
      if (rst_n && lo_finc[n] != lo_finc_d[n]) begin
        bit hit;
        hit = 0;
        for (int k = 0; k < 64; k++) if (recent[k] == lo_finc[n]) hit = 1;
        n_words++;
        lo_words[n]++;
        if (!hit) rx_bad++;
      end
    end

  // zero crossings of DAC 0 of LO 0 (1RF) and LO 6 (2RF)
  int zc0 = 0, zc6 = 0;
  sample_t pa = '0;
  always @(posedge clk_flg) begin
    pa <= flg_aux_sweep;
    if (pa < 0 && flg_aux_sweep >= 0 && flg_aux_flaw == sample_t'(flg_finc[16:2])) n_aux++;
  end
  sample_t p0 = '0, p6 = '0;
  always @(posedge clk_lo) begin
    p0 <= lo_dac0[0]; p6 <= lo_dac0[6];
    if (p0 < 0 && lo_dac0[0] >= 0) zc0++;
    if (p6 < 0 && lo_dac0[6] >= 0) zc6++;
  end

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real mi [N_LO], mq [N_LO];
    #20ns rst_n = 1;
    // ---- FLG set-up: law table, trim, pulse every 2nd frame ----
    for (int k = 0; k < 4096; k++) flg_wr({REG_LUT, 12'(k)}, 32'(29080 + 10 * k));
    flg_wr({REG_CTRL, 4'h0, FLG_STEP}, 32'd1200);
    flg_wr({REG_CTRL, 4'h0, FLG_PULSE_DIV}, 32'd2);
    // ---- LO set-up ----
    for (int n = 0; n < N_LO; n++) begin
      for (int k = 0; k < 64; k++) begin
        lo_wr(n, {REG_PROF1, 12'(k)}, 32'(6000 + 200 * n));     // amplitude demand
        lo_wr(n, {REG_PROF0, 12'(k)}, (n >= 6) ? 32'(16 * k) : 32'd0); // theta for 2RF
      end
      lo_wr(n, {REG_CTRL, 4'h0, LO_STEP}, 32'd2500);
      lo_wr(n, {REG_CTRL, 4'h0, LO_GV_DELAY}, 32'd26);
      lo_wr(n, {REG_CTRL, 4'h0, LO_OUT_DELAY}, 32'd50);
      lo_wr(n, {REG_CTRL, 4'h0, LO_KP_I}, 32'd16);
      lo_wr(n, {REG_CTRL, 4'h0, LO_KI_I}, 32'd8);
      lo_wr(n, {REG_CTRL, 4'h0, LO_KP_Q}, 32'd16);
      lo_wr(n, {REG_CTRL, 4'h0, LO_KI_Q}, 32'd8);
      lo_wr(n, {REG_CTRL, 4'h0, LO_DEMAND_ALT}, 32'd2048);
      // closed loop; 2RF doubler on LOs 6..9; LO 1 takes the alternate demand on pulsed frames
      lo_wr(n, {REG_CTRL, 4'h0, LO_MODE}, 32'h1 | ((n >= 6) ? 32'h2 : 32'h0) | ((n == 1) ? 32'h8 : 32'h0));
    end
    // ---- frame 0 (pulsed): B-dot ramps the field, F_inc sweeps ----
    @(negedge clk_flg); frame_start_in = 1; @(negedge clk_flg); frame_start_in = 0;
    adc_bdot = 14'sd7000;
    #60us;
    for (int n = 0; n < N_LO; n++) begin mi[n] = 0; mq[n] = 0; end
    for (int k = 0; k < 2000; k++) begin
      @(posedge clk_lo);
      for (int n = 0; n < N_LO; n++) begin mi[n] += real'(lo_gv_i[n]) / 2000.0; mq[n] += real'(lo_gv_q[n]) / 2000.0; end
    end
    for (int n = 0; n < N_LO; n++) begin
      real dem;
      dem = (n == 1) ? 0.5 * (6000 + 200 * n) : real'(6000 + 200 * n);
      chk(fabs(mi[n] - dem) < 150.0 && fabs(mq[n]) < 150.0,
          $sformatf("LO %0d gap volts I %f (demand %f) Q %f", n, mi[n], dem, mq[n]));
      if (fabs(mi[n] - dem) < 150.0 && fabs(mq[n]) < 150.0) n_loops_locked++;
    end
    if (fabs(mi[1] - 0.5 * 6200.0) < 150.0) n_pulse++;
    chk(flg_finc > 17'd29080, $sformatf("F_inc did not sweep: %0d", flg_finc));
    // 2RF at twice the 1RF frequency
    zc0 = 0; zc6 = 0;
    #20us;
    chk(zc6 > 2 * zc0 - 3 && zc6 < 2 * zc0 + 3, $sformatf("2RF crossings %0d vs 1RF %0d", zc6, zc0));
    if (zc6 > 2 * zc0 - 3 && zc6 < 2 * zc0 + 3) n_2rf++;
    // scope captures started at the frame start
    chk(lo_scope_done && flg_scope_done, "scope captures not complete");
    lo_host_sel = 4'd3; scope_rd_ch = 2'd1; scope_rd_addr = 14'd9999;
    @(negedge clk_lo); @(negedge clk_lo); @(negedge clk_flg); @(negedge clk_flg);
    chk(fabs(real'(lo_scope_data) - 6600.0) < 300.0, $sformatf("LO 3 scope last gap volts I %0d", lo_scope_data));
    if (lo_scope_done && flg_scope_done) n_scope++;
    // ---- frame 1 (not pulsed): LO 1 back to its full demand ----
    @(negedge clk_flg); frame_start_in = 1; @(negedge clk_flg); frame_start_in = 0;
    #40us;
    mi[1] = 0;
    for (int k = 0; k < 2000; k++) begin @(posedge clk_lo); mi[1] += real'(lo_gv_i[1]) / 2000.0; end
    chk(fabs(mi[1] - 6200.0) < 150.0 && frame_no == 10'd1, $sformatf("LO 1 non-pulsed I %f frame %0d", mi[1], frame_no));
    if (fabs(mi[1] - 6200.0) < 150.0) n_pulse++;
    // ---- beam: feed-forward on LO 0 (open loop) and the digital beam phase loop ----
    lo_wr(0, {REG_CTRL, 4'h0, LO_MODE}, 32'h4);
    wcm_amp = 1000.0;
    adc_wcm = 14'sd0;
    #10us;
    begin
      real mx;
      mx = 0;
      for (int k = 0; k < 3000; k++) begin @(posedge clk_lo); if (fabs(real'(lo_dac0[0])) > mx) mx = fabs(real'(lo_dac0[0])); end
      chk(fabs(mx - (6000.0 + 4000.0)) < 300.0, $sformatf("feed-forward drive amplitude %f", mx));
      if (fabs(mx - 10000.0) < 300.0) n_ff++;
    end
    begin
      int f0, dev;
      flg_wr({REG_CTRL, 4'h0, FLG_GAIN_BPL}, 32'd4096);
      adc_bdot = '0;
      #2us;
      flg_wr({REG_CTRL, 4'h0, FLG_MODE}, 32'd1);
      f0 = int'(flg_finc); dev = 0;
      for (int k = 0; k < 3000; k++) begin
        @(negedge clk_flg);
        adc_wcm = adc_t'($rtoi(4000.0 * $cos(TWO_PI * 0.02 * k)));
        if (int'(flg_finc) != f0) dev++;
      end
      chk(dev > 0, "digital beam phase loop had no effect");
      if (dev > 0) n_bpl++;
      flg_wr({REG_CTRL, 4'h0, FLG_MODE}, 32'd0);
    end
    // ---- saturation of F_inc ----
    flg_wr({REG_CTRL, 4'h0, FLG_GAIN_RAD}, 32'h7FFF);
    adc_rad = 14'sd8191;
    repeat (4) @(negedge clk_flg);
    chk(flg_finc == 17'h1FFFF && flg_finc_sat, "F_inc saturation");
    if (flg_finc_sat) n_sat++;
    adc_rad = '0;
    #2us;
    // ---- summary ----
    for (int n = 0; n < N_LO; n++)
      chk(lo_words[n] > 50, $sformatf("LO %0d received only %0d trigger-line words", n, lo_words[n]));
    chk(rx_bad == 0 && n_words > 100, $sformatf("trigger-line words %0d, wrong %0d", n_words, rx_bad));
    $display("mechanisms: aux_sweep=%0d words=%0d loops_locked=%0d 2rf=%0d ff=%0d pulse=%0d bpl=%0d sat=%0d scope=%0d",
             n_aux, n_words, n_loops_locked, n_2rf, n_ff, n_pulse, n_bpl, n_sat, n_scope);
    chk(n_aux > 0 && n_words > 0 && n_loops_locked > 0 && n_2rf > 0 && n_ff > 0 && n_pulse > 0 && n_bpl > 0 && n_sat > 0 && n_scope > 0,
        "a mechanism never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
