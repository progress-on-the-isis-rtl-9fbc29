// tb_delay_line -- random samples through the delay line; every output must
// equal the input of exactly 'delay' clocks earlier, for several delays
// including 0 and 1 (one register) and the maximum, 255.
module tb_delay_line;
  logic clk = 0;
  logic [15:0] din = '0, dout;
  logic [7:0] delay = '0;
  logic [15:0] hist [512];
  int checks = 0, failures = 0;

  always #4 clk = ~clk;
  delay_line dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int k = 511; k > 0; k--) hist[k] <= hist[k-1];
    hist[0] <= din;   // hist[k] after this edge = din sampled k edges ago (k=0: this edge)
  end

  initial begin
    int dl [6] = '{0, 1, 2, 17, 100, 255};
    foreach (dl[j]) begin
      @(negedge clk); delay = 8'(dl[j]);
      for (int n = 0; n < 600; n++) begin
        @(negedge clk);
        din = 16'($urandom);
        if (n > 300) begin
          int d;
          d = (dl[j] <= 1) ? 1 : dl[j];
          checks++;
          if (dout !== hist[d-1]) begin failures++; $display("FAIL delay %0d got %h exp %h", d, dout, hist[d-1]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
