// tb_cordic -- random vectors in all four quadrants: the phase must match
// atan2(Q, I) within 0.05 degree and the magnitude 1.6468 |v| within 0.1 %,
// with the result STAGES + 1 = 17 clocks after the input.
module tb_cordic;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  sample_t i_i = '0, q_i = '0;
  logic [15:0] phase;
  logic [16:0] mag;
  logic out_valid;
  real ei [$], eq [$];
  int checks = 0, failures = 0;

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  localparam real TWO_PI = 6.283185307179586;

  always #4 clk = ~clk;
  cordic dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int tin [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && in_valid) begin
    ei.push_back(real'(i_i)); eq.push_back(real'(q_i)); tin.push_back(cyc);
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    real a, b, p, m, dp;
    int t0;
    a = ei.pop_front(); b = eq.pop_front(); t0 = tin.pop_front();
    p = $atan2(b, a) / TWO_PI * 65536.0;
    if (p < 0) p += 65536.0;
    dp = real'(phase) - p;
    if (dp > 32768.0) dp -= 65536.0;
    if (dp < -32768.0) dp += 65536.0;
    m = 1.646760258 * $sqrt(a * a + b * b);
    checks++;
    if (fabs(dp) > 9.0 || fabs(real'(mag) - m) > 0.001 * m + 4.0 || cyc - t0 != 17) begin
      failures++;
      $display("FAIL (%f,%f) phase %0d exp %f mag %0d exp %f lat %0d", a, b, phase, p, mag, m, cyc - t0);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      i_i = 16'($urandom); q_i = 16'($urandom);
      if (i_i == -16'sd32768) i_i = -16'sd32767;
      if (q_i == -16'sd32768) q_i = -16'sd32767;
      in_valid = ($urandom_range(0, 4) != 0);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (30) @(negedge clk);
    checks++; if (ei.size() != 0) begin failures++; $display("FAIL %0d results missing", ei.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
