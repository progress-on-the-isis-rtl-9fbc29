// tb_pi_ctrl -- compares the PI controller with a reference model computed
// in the testbench, step by step: random setpoints, process values and
// gains, integrator clamping, output saturation, and the open-loop mode
// with a bumpless return to closed loop.
module tb_pi_ctrl;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, pv_valid = 0, closed_loop = 0;
  sample_t setpoint = '0, pv = '0, kp = '0, ki = '0, u;
  int checks = 0, failures = 0, nclamp = 0;
  longint integ;

  always #4 clk = ~clk;
  pi_ctrl dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat16(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  initial begin
    longint imax, imin, e, inx, unx;
    imax = 32767 * 4096; imin = -32768 * 4096;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // open loop: u follows the setpoint
    setpoint = 16'sd1234; @(posedge clk); #1;
    checks++; if (u !== 16'sd1234) begin failures++; $display("FAIL open loop %0d", u); end
    integ = 1234 * 4096;
    @(negedge clk); closed_loop = 1;
    for (int n = 0; n < 5000; n++) begin
      if (n % 400 == 0) begin
        kp = 16'($urandom_range(0, 2000));
        ki = 16'($urandom_range(0, (n % 800 == 0) ? 30000 : 300));
        setpoint = 16'($urandom);
      end
      pv = 16'($urandom_range(0, 4000)) - 16'sd2000 + setpoint / 2;
      pv_valid = ($urandom_range(0, 3) != 0);
      e   = longint'(setpoint) - longint'(pv);
      inx = integ + e * longint'(ki);
      unx = ((e * longint'(kp)) >>> 8) + (inx >>> 12);
      @(posedge clk); #1;
      if (pv_valid) begin
        if (inx > imax) begin integ = imax; nclamp++; end
        else if (inx < imin) begin integ = imin; nclamp++; end
        else integ = inx;
        checks++;
        if (u !== 16'(sat16(unx))) begin failures++; $display("FAIL n=%0d u=%0d exp %0d", n, u, sat16(unx)); end
      end
      @(negedge clk);
    end
    checks++; if (nclamp == 0) begin failures++; $display("FAIL integrator never clamped"); end
    // open loop again, then close: first output equals setpoint + kp*e
    closed_loop = 0; setpoint = -16'sd500; pv_valid = 0;
    @(posedge clk); #1;
    checks++; if (u !== -16'sd500) begin failures++; $display("FAIL open loop 2 %0d", u); end
    @(negedge clk); closed_loop = 1; kp = 16'sd0; ki = 16'sd0; pv = -16'sd500; pv_valid = 1;
    @(posedge clk); #1;
    checks++; if (u !== -16'sd500) begin failures++; $display("FAIL bumpless %0d", u); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
