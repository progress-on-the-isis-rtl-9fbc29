// tb_freq_law_lut -- loads the frequency law table with a known law
// (entry k = 29080 + 10*k, a linear sweep) and checks the F_inc read for
// random fields, the one-clock read latency and the clamping of negative B.
module tb_freq_law_lut;
  logic clk = 0;
  logic signed [15:0] b_field = '0;
  logic wr_en = 0;
  logic [11:0] wr_addr = '0;
  logic [16:0] wr_data = '0, finc_law;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;
  freq_law_lut dut (.clk, .b_field, .wr_en, .wr_addr, .wr_data, .finc_law);

  function automatic logic [16:0] law(int k); return 17'(29080 + 10 * k); endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 4096; k++) begin
      @(negedge clk); wr_en = 1; wr_addr = 12'(k); wr_data = law(k);
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      logic signed [15:0] b;
      int k;
      b = 16'($urandom);
      k = (b < 0) ? 0 : int'(b[14:3]);
      @(negedge clk); b_field = b;
      @(posedge clk); #1;
      checks++;
      if (finc_law !== law(k)) begin failures++; $display("FAIL b=%0d got %0d exp %0d", b, finc_law, law(k)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
