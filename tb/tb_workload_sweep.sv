// tb_workload_sweep -- one whole acceleration cycle on the full system.
//
// The published machine sweeps its fundamental cavities from 1.3 MHz to
// 3.1 MHz, and its second harmonic cavities from 2.6 MHz to 6.3 MHz, in the
// 10 ms of acceleration, and its virtual scopes show 10000-point channels.
// This testbench loads a linear frequency law from F_inc 29080 (1.3 MHz) to
// 69350 (3.1 MHz) over the whole table and drives a constant B-dot that
// fills the table in 10 ms. All ten LOs (six 1RF, four 2RF) run closed loop
// around behavioural cavities (20 clocks of delay, gain 0.6). Both scopes are
// set to span the whole 10 ms with 10000 points. At the start and at the end
// of the sweep it measures the RF frequency of a 1RF and a 2RF cavity from
// DAC zero crossings and checks each cavity's gap volts against its demand.
// Afterwards it reads the F_inc record of the FLG scope and the gap volts
// record of an LO scope at the start, middle and end of the cycle. The
// frequency range and scope size are the published ones; the law's shape,
// the cavity model and the loop gains are this testbench's own.
module tb_workload_sweep;
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
  localparam int F_LO = 29080, F_HI = 69350;
  localparam real HZ_PER_STEP = 250.0e6 * 768.0 / 4294967296.0;

  always #4167ps clk_flg = ~clk_flg;
  always #2000ps clk_lo  = ~clk_lo;

  dllrf_top dut (.*);

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  function automatic int law(int k); return F_LO + ((F_HI - F_LO) * k) / 4095; endfunction
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

  // behavioural cavities: delay and gain
  localparam int CAV_DLY = 20;
  sample_t dq [N_LO][CAV_DLY];
  always @(posedge clk_lo)
    for (int n = 0; n < N_LO; n++) begin
      for (int k = CAV_DLY - 1; k > 0; k--) dq[n][k] <= dq[n][k-1];
      dq[n][0] <= lo_dac0[n];
    end
  always_comb
    for (int n = 0; n < N_LO; n++) begin
      lo_adc0[n] = adc_t'($rtoi(0.6 * real'(dq[n][CAV_DLY-1]) / 4.0));
      lo_adc1[n] = '0;
    end
  initial for (int n = 0; n < N_LO; n++) for (int k = 0; k < CAV_DLY; k++) dq[n][k] = '0;

  // frequency of LO 0 (1RF) and LO 6 (2RF) over a 20 us window
  task automatic measure(input string when_s);
    int zc0, zc6;
    sample_t p0, p6;
    real f0, f6, fexp, mi [N_LO];
    int fw;
    zc0 = 0; zc6 = 0; p0 = lo_dac0[0]; p6 = lo_dac0[6];
    for (int n = 0; n < N_LO; n++) mi[n] = 0.0;
    fw = int'(lo_finc[0]);
    for (int k = 0; k < 5000; k++) begin
      @(posedge clk_lo);
      if (p0 < 0 && lo_dac0[0] >= 0) zc0++;
      if (p6 < 0 && lo_dac0[6] >= 0) zc6++;
      p0 = lo_dac0[0]; p6 = lo_dac0[6];
      for (int n = 0; n < N_LO; n++) mi[n] += real'(lo_gv_i[n]) / 5000.0;
    end
    fw = (fw + int'(lo_finc[0])) / 2;
    fexp = real'(fw) * HZ_PER_STEP;
    f0 = real'(zc0) / 20.0e-6;
    f6 = real'(zc6) / 20.0e-6;
    $display("%s: F_inc %0d, expected %.3f MHz, 1RF %.3f MHz, 2RF %.3f MHz", when_s, fw, fexp / 1e6, f0 / 1e6, f6 / 1e6);
    chk(fabs(f0 - fexp) < 0.04 * fexp, $sformatf("%s 1RF frequency %f", when_s, f0));
    chk(fabs(f6 - 2.0 * fexp) < 0.04 * fexp, $sformatf("%s 2RF frequency %f", when_s, f6));
    for (int n = 0; n < N_LO; n++)
      chk(fabs(mi[n] - 6000.0) < 200.0, $sformatf("%s LO %0d gap volts I %f", when_s, n, mi[n]));
  endtask

  initial begin
    #30ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ns rst_n = 1;
    for (int k = 0; k < 4096; k++) flg_wr({REG_LUT, 12'(k)}, 32'(law(k)));
    flg_wr({REG_CTRL, 4'h0, FLG_SCOPE_DEC}, 32'd120);           // 10000 x 1 us = 10 ms
    for (int n = 0; n < N_LO; n++) begin
      for (int k = 0; k < 1024; k++) lo_wr(n, {REG_PROF1, 12'(k)}, 32'd6000);
      lo_wr(n, {REG_CTRL, 4'h0, LO_STEP}, 32'd2500);
      lo_wr(n, {REG_CTRL, 4'h0, LO_GV_DELAY}, 32'd26);
      lo_wr(n, {REG_CTRL, 4'h0, LO_KP_I}, 32'd16);
      lo_wr(n, {REG_CTRL, 4'h0, LO_KI_I}, 32'd8);
      lo_wr(n, {REG_CTRL, 4'h0, LO_KP_Q}, 32'd16);
      lo_wr(n, {REG_CTRL, 4'h0, LO_KI_Q}, 32'd8);
      lo_wr(n, {REG_CTRL, 4'h0, LO_SCOPE_DEC}, 32'd250);       // 10000 x 1 us = 10 ms
      lo_wr(n, {REG_CTRL, 4'h0, LO_MODE}, (n >= 6) ? 32'h3 : 32'h1);
    end
    // the acceleration cycle
    @(negedge clk_flg); frame_start_in = 1; @(negedge clk_flg); frame_start_in = 0;
    adc_bdot = 14'sd7158;
    #200us;
    measure("start");
    #9.65ms;
    measure("end");
    chk(int'(flg_finc) > F_HI - 600 && !flg_finc_sat, $sformatf("F_inc at the end %0d", flg_finc));
    #200us;
    // scope records over the whole cycle
    chk(flg_scope_done && lo_scope_done, "10 ms scope captures not complete");
    lo_host_sel = 4'd2;
    foreach (scope_rd_addr_list[i]) begin
      real t, fexp;
      scope_rd_addr = 14'(scope_rd_addr_list[i]);
      scope_rd_ch = 2'd3;                                     // FLG: summed F_inc / 4
      repeat (3) @(negedge clk_flg);
      t = real'(scope_rd_addr_list[i]) * 1.0e-6;
      fexp = real'(law(int'(7158.0 * t * 120.0e6 / 262144.0) >>> 3)) / 4.0;
      chk(fabs(real'(flg_scope_data) - fexp) < 60.0,
          $sformatf("FLG scope point %0d: %0d expected %f", scope_rd_addr_list[i], flg_scope_data, fexp));
      scope_rd_ch = 2'd1;                                     // LO: gap volts I
      repeat (3) @(negedge clk_flg);
      chk(fabs(real'(lo_scope_data) - 6000.0) < 400.0,
          $sformatf("LO scope point %0d: %0d", scope_rd_addr_list[i], lo_scope_data));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int scope_rd_addr_list [3] = '{500, 5000, 9900};
endmodule
