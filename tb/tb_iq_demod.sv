// tb_iq_demod -- feeds x = A cos(wt + phi) with a reference cos(wt),
// sin(wt) for several amplitudes and phases and checks that the settled
// outputs are I = A cos(phi), Q = -A sin(phi) within the filter ripple.
// Also checks that iq_valid follows x_valid by three clocks.
module tb_iq_demod;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, x_valid = 0;
  sample_t x = '0, cos_i = '0, sin_i = '0, i_o, q_o;
  logic iq_valid;
  logic [3:0] vhist = '0;
  int checks = 0, failures = 0;

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  localparam real TWO_PI = 6.283185307179586;

  always #4 clk = ~clk;
  iq_demod dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    vhist <= {vhist[2:0], x_valid};
    if (rst_n) begin
      checks++;
      if (iq_valid !== vhist[2]) begin failures++; $display("FAIL valid timing"); end
    end
  end

  initial begin
    real amp [4] = '{20000.0, 8000.0, 30000.0, 1000.0};
    real phs [4] = '{0.3, 2.5, -1.2, 4.0};
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int c = 0; c < 4; c++) begin
      real acc_i, acc_q;
      int nacc;
      acc_i = 0; acc_q = 0; nacc = 0;
      for (int n = 0; n < 3000; n++) begin
        real w;
        w = TWO_PI * 0.0271 * n;            // about 6.8 MHz at 250 MS/s
        x_valid = 1'b1;
        x     = sample_t'($rtoi(amp[c] * $cos(w + phs[c])));
        cos_i = sample_t'($rtoi(32767.0 * $cos(w)));
        sin_i = sample_t'($rtoi(32767.0 * $sin(w)));
        @(negedge clk);
        if (n >= 2000) begin acc_i += real'(i_o); acc_q += real'(q_o); nacc++; end
      end
      acc_i /= nacc; acc_q /= nacc;
      checks++;
      if (fabs(acc_i - amp[c] * $cos(phs[c])) > 0.01 * amp[c] + 20 ||
          fabs(acc_q + amp[c] * $sin(phs[c])) > 0.01 * amp[c] + 20) begin
        failures++;
        $display("FAIL case %0d I %f exp %f Q %f exp %f", c, acc_i, amp[c] * $cos(phs[c]), acc_q, -amp[c] * $sin(phs[c]));
      end
    end
    x_valid = 0;
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
