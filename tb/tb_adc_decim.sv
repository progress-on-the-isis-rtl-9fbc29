// tb_adc_decim -- random ADC samples: each output must be the average of the
// last two samples, scaled by the Q4.12 gain and saturated, with one output
// strobe every second clock.
module tb_adc_decim;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  adc_t adc = '0;
  sample_t scale = 16'sd4096, dout;
  logic dvalid;
  int checks = 0, failures = 0, nv = 0, nsat = 0;
  int prev = 0, cur = 0;

  always #4 clk = ~clk;
  adc_decim dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hist [2];
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      adc = 14'($urandom);
      if (n % 500 == 0) scale = 16'($signed(16'($urandom)) >>> 1);
      @(posedge clk);
      hist[1] = hist[0]; hist[0] = int'(adc);
      #1;
      if (dvalid) begin
        longint e;
        nv++;
        e = ((longint'((hist[0] + hist[1]) >>> 1) * 4) * longint'(scale)) >>> 12;
        if (e > 32767) begin e = 32767; nsat++; end
        if (e < -32768) begin e = -32768; nsat++; end
        checks++;
        if (dout !== 16'(e)) begin failures++; $display("FAIL n=%0d got %0d exp %0d", n, dout, e); end
      end
      @(negedge clk);
    end
    checks++; if (nv != 2000) begin failures++; $display("FAIL %0d strobes", nv); end
    checks++; if (nsat == 0) begin failures++; $display("FAIL no saturation seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
