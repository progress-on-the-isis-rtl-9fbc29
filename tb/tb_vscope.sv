// tb_vscope -- virtual scope capture: eight source signals that are known
// functions of time, four channels with chosen sources, decimation 1 and 3,
// a full 10000-point capture; every stored point is read back and checked,
// and 'done' must rise after exactly 10000 * decim clocks.
module tb_vscope;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, trigger = 0;
  sample_t src [SCOPE_SRC];
  logic [11:0] sel = '0;
  logic [15:0] decim = 16'd1;
  logic [1:0] rd_ch = '0;
  logic [13:0] rd_addr = '0;
  sample_t rd_data;
  logic done;
  int checks = 0, failures = 0;
  int t = 0;

  always #4 clk = ~clk;
  vscope dut (.*);

  // source s at clock t carries 1000 * s + t (mod 2^16)
  always @(posedge clk) t <= t + 1;
  always_comb for (int s = 0; s < SCOPE_SRC; s++) src[s] = sample_t'(1000 * s + t);

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dec [2] = '{1, 3};
    int chsrc [4];
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    foreach (dec[d]) begin
      int t0, tdone;
      chsrc = '{5, 0, 7, 2};
      if (d == 1) chsrc = '{1, 6, 3, 4};
      sel = {3'(chsrc[3]), 3'(chsrc[2]), 3'(chsrc[1]), 3'(chsrc[0])};
      decim = 16'(dec[d]);
      trigger = 1; @(negedge clk); trigger = 0;
      t0 = t;   // first point is taken on the clock with counter value t0 + decim - 1
      while (!done) @(negedge clk);
      tdone = t;
      checks++;
      if (tdone - t0 != 10000 * dec[d]) begin failures++; $display("FAIL capture took %0d", tdone - t0); end
      for (int c = 0; c < 4; c++)
        for (int p = 0; p < 10000; p += (p < 20 || p > 9980) ? 1 : 7) begin
          rd_ch = 2'(c); rd_addr = 14'(p);
          @(negedge clk);
          checks++;
          if (rd_data !== sample_t'(1000 * chsrc[c] + t0 - 1 + (p + 1) * dec[d])) begin
            failures++;
            if (failures < 10) $display("FAIL ch %0d p %0d got %0d exp %0d", c, p, rd_data, 1000 * chsrc[c] + t0 - 1 + (p + 1) * dec[d]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
