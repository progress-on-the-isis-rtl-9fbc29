// tb_bandpass_filter -- checks the band-pass filter against a reference
// model of the same two first-order sections (bit exact), and its band
// behaviour: a constant input decays to zero, an in-band sine passes and a
// near-Nyquist sine is attenuated.
module tb_bandpass_filter;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, x_valid = 0;
  sample_t x = '0, y;
  int checks = 0, failures = 0;

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  longint hp_acc = 0, lp_acc = 0;
  localparam real TWO_PI = 6.283185307179586;

  always #4 clk = ~clk;
  bandpass_filter dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat16(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  task automatic step(input sample_t v, input bit valid);
    longint hp;
    x = v; x_valid = valid;
    hp = longint'(v) - (hp_acc >>> 10);
    @(posedge clk);
    if (valid) begin
      hp_acc = hp_acc + longint'(v) - (hp_acc >>> 10);
      lp_acc = lp_acc + hp - (lp_acc >>> 3);
    end
    #1;
    checks++;
    if (y !== 16'(sat16(lp_acc >>> 3))) begin failures++; $display("FAIL y=%0d exp %0d", y, sat16(lp_acc >>> 3)); end
    @(negedge clk);
  endtask

  initial begin
    real peak;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // constant input: output must decay towards zero
    for (int n = 0; n < 12000; n++) step(16'sd10000, 1'b1);
    checks++; if (y > 16'sd30 || y < -16'sd30) begin failures++; $display("FAIL DC not removed %0d", y); end
    // in-band sine (period 200 samples)
    peak = 0;
    for (int n = 0; n < 4000; n++) begin
      step(sample_t'($rtoi(8000.0 * $sin(TWO_PI * n / 200.0))), ($urandom_range(0, 7) != 0));
      if (n > 2000 && fabs(real'(y)) > peak) peak = fabs(real'(y));
    end
    checks++; if (peak < 6000.0) begin failures++; $display("FAIL in-band peak %f", peak); end
    // near-Nyquist sine (period 2.5 samples)
    peak = 0;
    for (int n = 0; n < 4000; n++) begin
      step(sample_t'($rtoi(8000.0 * $sin(TWO_PI * n / 2.5))), 1'b1);
      if (n > 2000 && fabs(real'(y)) > peak) peak = fabs(real'(y));
    end
    checks++; if (peak > 3000.0) begin failures++; $display("FAIL high band peak %f", peak); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
