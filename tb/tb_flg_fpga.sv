// tb_flg_fpga -- the FLG FPGA on its own.
//
// The host loads a linear frequency law (entry k = 29080 + 10 k) and the
// trim profile. A constant B-dot makes the field ramp; F_inc must follow the
// law at the field the testbench integrates, and the trigger lines, decoded
// by a receiver on a 250 MHz clock, must carry the same words. Then the
// scaled radial loop and trim inputs, the saturation, the frame counter and
// pulse flag, the digital beam phase detector (a WCM signal synthesised
// from the FLG's own F_inc with a known phase, stepped by 30 degrees), the
// beam phase loop select and a scope capture are checked. The auxiliary
// outputs must carry F_inc/4 and an RF sweep at the F_inc frequency
// (counted in zero crossings).
module tb_flg_fpga;
  import llrf_pkg::*;
  logic clk = 0, clk_rx = 0, rst_n = 0;
  adc_t adc_bdot = '0, adc_bpl = '0, adc_bll = '0, adc_rad = '0, adc_wcm;
  logic frame_start_in = 0, ts2_in = 0;
  logic host_we = 0;
  logic [15:0] host_addr = '0;
  logic [31:0] host_wdata = '0;
  logic [1:0] scope_rd_ch = '0;
  logic [8:0] scope_rd_addr = '0;
  sample_t scope_rd_data;
  logic scope_done, frame_toggle, pulse_frame, ts2, finc_sat;
  logic [3:0] trig;
  logic [16:0] finc, rx_finc;
  logic [15:0] beam_phase;
  logic [16:0] beam_mag;
  logic [9:0] frame_no;
  sample_t aux_flaw, aux_sweep;
  logic rx_valid;
  int checks = 0, failures = 0;
  localparam real TWO_PI = 6.283185307179586;

  always #4167ps clk = ~clk;      // 120 MHz
  always #2000ps clk_rx = ~clk_rx;

  flg_fpga #(.SCOPE_PTS(500)) dut (.*);
  trigline_rx u_rx (.clk(clk_rx), .rst_n, .trig, .finc(rx_finc), .finc_valid(rx_valid));

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  function automatic int law(int k); return 29080 + 10 * k; endfunction

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // WCM model: a signal at the FLG's own RF phase plus phi0
  longint unsigned ref_acc = 0;
  real phi0 = 0.0;
  always @(posedge clk) ref_acc <= (ref_acc + longint'(finc) * 1600) & 64'hFFFF_FFFF;
  assign adc_wcm = adc_t'($rtoi(6000.0 * $cos(TWO_PI * real'(ref_acc) / 4294967296.0 + phi0)));

  // model integrator
  // (the FLG registers the frame start once before the integrator sees it)
  longint acc_m = 0;
  logic   fs_d = 0;
  always @(posedge clk) begin
    fs_d <= frame_start_in;
    if (fs_d) acc_m <= 0; else acc_m <= acc_m + longint'(adc_bdot);
  end

  // every received word must be one of the last F_inc values
  int n_rx = 0, rx_bad = 0;
  logic [16:0] recent [64];
  always @(posedge clk) begin
    for (int k = 63; k > 0; k--) recent[k] <= recent[k-1];
    recent[0] <= finc;
  end
  always @(posedge clk_rx) if (rx_valid) begin
    bit hit;
    hit = 0;
    for (int k = 0; k < 64; k++) if (recent[k] == rx_finc) hit = 1;
    n_rx++;
    if (!hit) rx_bad++;
  end

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real p1, p2, d;
    #20ns rst_n = 1;
    for (int k = 0; k < 4096; k++) wr({REG_LUT, 12'(k)}, 32'(law(k)));
    for (int k = 0; k < 8; k++) wr({REG_PROF0, 12'(k)}, 32'd1000);
    wr({REG_CTRL, 4'h0, FLG_STEP}, 32'd60000);
    wr({REG_CTRL, 4'h0, FLG_PULSE_DIV}, 32'd3);
    // frame 0: field ramp
    @(negedge clk); frame_start_in = 1; @(negedge clk); frame_start_in = 0;
    adc_bdot = 14'sd4000;
    for (int s = 0; s < 20; s++) begin
      longint b;
      int k, f;
      repeat (2000) @(negedge clk);
      b = acc_m >>> 18; if (b > 32767) b = 32767;
      k = int'(b) >>> 3;
      f = int'(finc);
      chk(f == law(k) || f == law(k - 1), $sformatf("law: finc %0d for entry %0d (%0d)", f, k, law(k)));
    end
    chk(n_rx > 200 && rx_bad == 0, $sformatf("trigger lines: %0d words, %0d wrong", n_rx, rx_bad));
    // hold the field: scaled radial loop and trim
    adc_bdot = '0;
    repeat (10) @(negedge clk);
    begin
      int f0;
      f0 = int'(finc);
      begin
        int zc;
        real fexp;
        sample_t prev;
        chk(int'(aux_flaw) == f0 / 4, $sformatf("aux frequency law %0d for F_inc %0d", aux_flaw, f0));
        zc = 0; prev = aux_sweep;
        for (int k = 0; k < 24000; k++) begin
          @(negedge clk);
          if (prev < 0 && aux_sweep >= 0) zc++;
          prev = aux_sweep;
        end
        fexp = real'(f0) * 1600.0 / 4294967296.0 * 24000.0;
        chk(fabs(real'(zc) - fexp) <= 1.5, $sformatf("aux sweep %0d cycles, expected %f", zc, fexp));
      end
      adc_rad = 14'sd100;
      wr({REG_CTRL, 4'h0, FLG_GAIN_RAD}, 32'd4096);     // x1 on the 16-bit value = 400
      wr({REG_CTRL, 4'h0, FLG_GAIN_TRIM}, 32'd2048);    // x0.5 of 1000 = 500
      repeat (3) @(negedge clk);
      chk(int'(finc) == f0 + 900, $sformatf("loop and trim sum %0d exp %0d", finc, f0 + 900));
      wr({REG_CTRL, 4'h0, FLG_GAIN_BLL}, 32'h8000);     // -8 x bunch length
      adc_bll = 14'sd8000;
      repeat (3) @(negedge clk);
      chk(finc == 17'd0 && finc_sat, "negative saturation");
      adc_bll = '0; adc_rad = '0;
      wr({REG_CTRL, 4'h0, FLG_GAIN_BLL}, 32'd0);
      wr({REG_CTRL, 4'h0, FLG_GAIN_TRIM}, 32'd0);
    end
    // frames: counter and pulse flag (every 3rd frame)
    for (int f = 1; f <= 6; f++) begin
      @(negedge clk); frame_start_in = 1; ts2_in = (f == 5); @(negedge clk); frame_start_in = 0;
      @(negedge clk);
      chk(frame_no == 10'(f) && pulse_frame == (f % 3 == 0) && ts2 == (f == 5),
          $sformatf("frame %0d: no %0d pulse %0b ts2 %0b", f, frame_no, pulse_frame, ts2));
    end
    // beam phase detector: step the WCM phase by +30 degrees
    adc_bdot = '0;
    phi0 = 0.5;
    #60us;
    p1 = real'(beam_phase) * 360.0 / 65536.0;
    phi0 = 0.5 + TWO_PI / 12.0;
    #60us;
    p2 = real'(beam_phase) * 360.0 / 65536.0;
    d = p2 - p1; if (d > 180.0) d -= 360.0; if (d < -180.0) d += 360.0;
    chk(fabs(d + 30.0) < 1.5, $sformatf("beam phase step %f deg, expected -30", d));
    chk(fabs(real'(beam_mag) - 1.6468 * 6000.0 * 4.0) < 600.0, $sformatf("beam magnitude %0d", beam_mag));
    // digital beam phase loop into the F_inc sum
    begin
      int f0, dev;
      f0 = int'(finc); dev = 0;
      wr({REG_CTRL, 4'h0, FLG_GAIN_BPL}, 32'd4096);
      wr({REG_CTRL, 4'h0, FLG_MODE}, 32'd1);
      phi0 = 0.5;
      for (int k = 0; k < 20000; k++) begin
        @(negedge clk);
        if (int'(finc) != f0) dev++;
      end
      chk(dev > 100, $sformatf("digital beam phase loop did not move F_inc (%0d)", dev));
      wr({REG_CTRL, 4'h0, FLG_MODE}, 32'd0);
      repeat (5) @(negedge clk);
      chk(int'(finc) == f0, $sformatf("analogue loop input restored %0d exp %0d", finc, f0));
    end
    // scope capture from a frame start: channel 3 shows F_inc / 4
    @(negedge clk); frame_start_in = 1; @(negedge clk); frame_start_in = 0;
    #6us;
    chk(scope_done, "scope not done");
    scope_rd_ch = 2'd3; scope_rd_addr = 9'd300;
    @(negedge clk); @(negedge clk);
    chk(scope_rd_data == sample_t'(finc[16:2]), $sformatf("scope F_inc %0d exp %0d", scope_rd_data, finc[16:2]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
