// tb_finc_sum -- random law words, loop signals, trim and gains against a
// reference sum with Q4.12 gains; checks the one-clock latency and the
// saturation at both ends of the 17-bit range.
module tb_finc_sum;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [16:0] finc_law = '0, finc;
  sample_t loop_bpl = '0, loop_bll = '0, loop_rad = '0, trim = '0;
  sample_t gain_bpl = '0, gain_bll = '0, gain_rad = '0, gain_trim = '0;
  logic sat;
  int checks = 0, failures = 0, nsat = 0;

  always #4 clk = ~clk;
  finc_sum dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      longint corr, tot, expv;
      logic exps;
      @(negedge clk);
      finc_law = 17'($urandom);
      loop_bpl = 16'($urandom); loop_bll = 16'($urandom); loop_rad = 16'($urandom); trim = 16'($urandom);
      gain_bpl = 16'($signed(16'($urandom)) >>> (n % 8)); gain_bll = 16'($signed(16'($urandom)) >>> 4);
      gain_rad = 16'($signed(16'($urandom)) >>> 6); gain_trim = 16'($signed(16'($urandom)) >>> (n % 5));
      corr = longint'(loop_bpl) * gain_bpl + longint'(loop_bll) * gain_bll + longint'(loop_rad) * gain_rad
           + longint'(trim) * gain_trim;
      tot  = longint'(finc_law) + (corr >>> 12);
      exps = (tot < 0) || (tot > 131071);
      expv = (tot < 0) ? 0 : (tot > 131071 ? 131071 : tot);
      @(posedge clk); #1;
      checks++;
      if (finc !== 17'(expv) || sat !== exps) begin
        failures++; $display("FAIL n=%0d got %0d/%0b exp %0d/%0b", n, finc, sat, expv, exps);
      end
      if (exps) nsat++;
    end
    checks++; if (nsat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
