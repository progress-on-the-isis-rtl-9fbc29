// tb_lo_fpga -- one LO FPGA in a loop with a behavioural cavity.
//
// A trigger-line transmitter on its own 120 MHz clock sends F_inc words. The
// cavity model feeds DAC 0 back to the gap volts ADC through a fixed delay
// and a gain; a disturbance can be added (beam loading). The test checks:
// the received F_inc; the RF frequency at DAC 0 for a 1RF and a 2RF
// (doubled) setting; open loop amplitude equal to the demand; closed IQ
// loops settling the gap volts I to the demand and Q to zero, also against
// a beam-loading disturbance; the beam feed-forward path; the pipeline delay
// of DAC 1; the alternate demand on pulsed frames; and a scope capture.
module tb_lo_fpga;
  import llrf_pkg::*;
  logic clk = 0, clk_tx = 0, rst_n = 0;
  logic [16:0] finc_tx = 17'd69350;     // 3.1 MHz
  logic [3:0]  trig;
  logic        frame_toggle = 0, pulse_frame = 0, ts2 = 0;
  adc_t        adc0, adc1;
  sample_t     dac0, dac1, scope_rd_data, gv_i, gv_q, pi_i, pi_q;
  logic        host_we = 0;
  logic [15:0] host_addr = '0;
  logic [31:0] host_wdata = '0;
  logic [1:0]  scope_rd_ch = '0;
  logic [8:0]  scope_rd_addr = '0;
  logic        scope_done;
  logic [16:0] finc;
  int checks = 0, failures = 0;
  localparam real TWO_PI = 6.283185307179586;

  always #2000ps clk = ~clk;       // 250 MHz
  always #4167ps clk_tx = ~clk_tx; // 120 MHz

  trigline_tx u_tx (.clk(clk_tx), .rst_n, .finc(finc_tx), .trig, .sent());

  lo_fpga #(.SCOPE_PTS(500)) dut (.*);

  // ---- behavioural cavity: delay, gain, disturbance, WCM source ----
  localparam int CAV_DLY = 20;
  sample_t dq [CAV_DLY];
  real     cav_gain = 1.0;
  real     dist_amp = 0.0;
  real     wcm_amp  = 0.0;
  real     ph = 0.0;
  always @(posedge clk) begin
    for (int k = CAV_DLY - 1; k > 0; k--) dq[k] <= dq[k-1];
    dq[0] <= dac0;
    ph <= ph + TWO_PI * real'(finc) * 768.0 / 4294967296.0;
  end
  always_comb begin
    real v;
    v = cav_gain * real'(dq[CAV_DLY-1]) / 4.0 + dist_amp * $sin(ph);
    if (v > 8191.0) v = 8191.0;
    if (v < -8192.0) v = -8192.0;
    adc0 = adc_t'($rtoi(v));
    adc1 = adc_t'($rtoi(wcm_amp * $cos(ph)));
  end
  initial for (int k = 0; k < CAV_DLY; k++) dq[k] = '0;

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  // gap volts I and Q averaged over 2000 clocks
  real avg_i, avg_q;
  task automatic settle_avg();
    avg_i = 0; avg_q = 0;
    for (int k = 0; k < 2000; k++) begin
      @(posedge clk); avg_i += real'(gv_i) / 2000.0; avg_q += real'(gv_q) / 2000.0;
    end
  endtask

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // amplitude and frequency of a DAC output over n clocks
  task automatic measure(input bit which, input int n, output real amp, output real freq);
    int zc; sample_t prev, v; real mx;
    zc = 0; mx = 0; prev = '0;
    for (int k = 0; k < n; k++) begin
      @(posedge clk); #1;
      v = which ? dac1 : dac0;
      if (prev < 0 && v >= 0) zc++;
      if (fabs(real'(v)) > mx) mx = fabs(real'(v));
      prev = v;
    end
    amp = mx; freq = real'(zc) * 250.0e6 / real'(n);
  endtask

  initial begin
    #3ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real amp, freq, fexp;
    #20ns rst_n = 1;
    // load the amplitude demand profile (constant 8000) and theta = 0
    for (int k = 0; k < 4; k++) begin
      wr({REG_PROF1, 12'(k)}, 32'd8000);
      wr({REG_PROF0, 12'(k)}, 32'd0);
    end
    wr({REG_CTRL, 4'h0, LO_STEP}, 32'd60000);
    wr({REG_CTRL, 4'h0, LO_GV_DELAY}, 32'd26);
    wr({REG_CTRL, 4'h0, LO_OUT_DELAY}, 32'd100);
    frame_toggle = 1;                           // frame start: profiles restart
    #2us;
    chk(finc == 17'd69350, $sformatf("received F_inc %0d", finc));

    // open loop: 1RF frequency and the demand amplitude at DAC 0
    measure(0, 20000, amp, freq);
    fexp = 69350.0 * 768.0 * 250.0e6 / 4294967296.0;
    chk(fabs(freq - fexp) < 0.01 * fexp, $sformatf("1RF frequency %f exp %f", freq, fexp));
    chk(fabs(amp - 8000.0) < 100.0, $sformatf("open loop amplitude %f", amp));

    // 2RF: doubled frequency
    wr({REG_CTRL, 4'h0, LO_MODE}, 32'h2);
    finc_tx = 17'd29080;                        // 1.3 MHz fundamental
    #2us;
    measure(0, 20000, amp, freq);
    fexp = 2.0 * 29080.0 * 768.0 * 250.0e6 / 4294967296.0;
    chk(fabs(freq - fexp) < 0.01 * fexp, $sformatf("2RF frequency %f exp %f", freq, fexp));
    wr({REG_CTRL, 4'h0, LO_MODE}, 32'h0);
    finc_tx = 17'd69350;

    // DAC 1: same sweep from the PI outputs, 100 clocks later than the drive
    begin
      sample_t h [$];
      int err;
      err = 0;
      for (int k = 0; k < 300; k++) begin
        @(posedge clk); #1;
        h.push_back(dac0);
        if (k >= 100 && dac1 != h[k - 100]) err++;
      end
      chk(err == 0, $sformatf("DAC 1 delay mismatches %0d", err));
    end

    // closed loop with a cavity gain of 0.6 and a loading disturbance
    cav_gain = 0.6;
    wr({REG_CTRL, 4'h0, LO_KP_I}, 32'd16);
    wr({REG_CTRL, 4'h0, LO_KI_I}, 32'd8);
    wr({REG_CTRL, 4'h0, LO_KP_Q}, 32'd16);
    wr({REG_CTRL, 4'h0, LO_KI_Q}, 32'd8);
    #2us;
    settle_avg();
    chk(fabs(avg_i - 0.6 * 8000.0) < 300.0, $sformatf("open loop gap volts I %f", avg_i));
    wr({REG_CTRL, 4'h0, LO_MODE}, 32'h1);
    #40us;
    settle_avg();
    chk(fabs(avg_i - 8000.0) < 120.0 && fabs(avg_q) < 120.0,
        $sformatf("closed loop I %f Q %f", avg_i, avg_q));
    dist_amp = 1200.0;                          // beam loading
    #40us;
    settle_avg();
    chk(fabs(avg_i - 8000.0) < 120.0 && fabs(avg_q) < 120.0,
        $sformatf("closed loop with loading I %f Q %f", avg_i, avg_q));
    chk(fabs(real'(pi_q)) > 500.0, $sformatf("Q loop did not act: pi_q %0d", pi_q));
    dist_amp = 0.0;

    // alternate demand on pulsed frames
    wr({REG_CTRL, 4'h0, LO_DEMAND_ALT}, 32'd2048);   // half scale
    wr({REG_CTRL, 4'h0, LO_MODE}, 32'h9);
    pulse_frame = 1;
    #40us;
    settle_avg();
    chk(fabs(avg_i - 4000.0) < 120.0, $sformatf("alternate demand I %f", avg_i));
    pulse_frame = 0;
    #40us;
    settle_avg();
    chk(fabs(avg_i - 8000.0) < 120.0, $sformatf("demand back I %f", avg_i));

    // beam feed-forward in open loop: WCM I/Q added to the drive
    wr({REG_CTRL, 4'h0, LO_MODE}, 32'h0);
    wcm_amp = 1000.0;
    #4us;
    measure(0, 4000, amp, freq);
    chk(fabs(amp - 8000.0) < 100.0, $sformatf("feed-forward off amplitude %f", amp));
    wr({REG_CTRL, 4'h0, LO_MODE}, 32'h4);
    #4us;
    measure(0, 4000, amp, freq);
    chk(fabs(amp - 12000.0) < 250.0, $sformatf("feed-forward on amplitude %f (8000 + 4 x 1000)", amp));

    // scope: frame start captures 500 points of gap volts I (source 1)
    wr({REG_CTRL, 4'h0, LO_SCOPE_SEL}, {20'h0, 3'd3, 3'd2, 3'd1, 3'd7});
    frame_toggle = 0;
    #3us;
    chk(scope_done, "scope capture not done");
    scope_rd_ch = 2'd0; scope_rd_addr = 9'd400;
    @(negedge clk); @(negedge clk);
    chk(scope_rd_data == 16'sd8000, $sformatf("scope setpoint sample %0d", scope_rd_data));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
