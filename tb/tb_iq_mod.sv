// tb_iq_mod -- random I, Q, cos and sin: the output two clocks later must be
// (I cos + Q sin) / 2^15, saturated to 16 bits.
module tb_iq_mod;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  sample_t i_i = '0, q_i = '0, cos_i = '0, sin_i = '0, y;
  longint exp_q [3];
  int checks = 0, failures = 0, nsat = 0;

  always #4 clk = ~clk;
  iq_mod dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      longint e;
      i_i = 16'($urandom); q_i = 16'($urandom); cos_i = 16'($urandom); sin_i = 16'($urandom);
      e = (longint'(i_i) * cos_i + longint'(q_i) * sin_i) >>> 15;
      if (e > 32767 || e < -32768) nsat++;
      e = e > 32767 ? 32767 : (e < -32768 ? -32768 : e);
      exp_q[2] = exp_q[1]; exp_q[1] = exp_q[0]; exp_q[0] = e;
      @(posedge clk); #1;
      if (n >= 1) begin
        checks++;
        if (y !== 16'(exp_q[1])) begin failures++; $display("FAIL n=%0d y=%0d exp %0d", n, y, exp_q[1]); end
      end
      @(negedge clk);
    end
    checks++; if (nsat == 0) begin failures++; $display("FAIL no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
