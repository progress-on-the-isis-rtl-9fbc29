// tb_dds -- checks the DDS outputs against cos/sin of the phase computed in
// the testbench: frequency from F_inc * FINC_MULT, the frequency doubler,
// the phase offset and the programmable delay of the delayed DDS.
module tb_dds;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, harmonic2 = 0;
  logic [16:0] finc = '0;
  logic [15:0] phase_ofs = '0;
  logic [7:0]  delay = '0;
  sample_t cos_o, sin_o;
  phase_t phase_o;
  int checks = 0, failures = 0;

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  longint unsigned ref_acc;
  logic [31:0] hist [256];

  always #4 clk = ~clk;
  dds dut (.*);

  localparam real TWO_PI = 6.283185307179586;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference phase accumulator, with the same 32-bit wrap
  always @(posedge clk) begin
    if (!rst_n) ref_acc <= 0;
    else ref_acc <= (ref_acc + longint'(finc) * 768) & 64'hFFFF_FFFF;
  end

  task automatic check_point(input int d, input bit h2, input logic [15:0] ofs);
    // the output at this clock comes from the accumulator d + 2 clocks ago
    logic [31:0] ph, a;
    real exp_c, exp_s;
    a  = hist[d + 1];
    ph = (h2 ? (a << 1) : a) + {ofs, 16'h0};
    ph = {ph[31:22], 22'h0};
    exp_c = 32767.0 * $cos(TWO_PI * real'(ph) / 4294967296.0);
    exp_s = 32767.0 * $sin(TWO_PI * real'(ph) / 4294967296.0);
    checks++;
    if (fabs(real'(cos_o) - exp_c) > 1.5 || fabs(real'(sin_o) - exp_s) > 1.5) begin
      failures++;
      $display("FAIL d=%0d h2=%0b cos %0d exp %f sin %0d exp %f", d, h2, cos_o, exp_c, sin_o, exp_s);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int seg = 0; seg < 8; seg++) begin
      @(negedge clk);
      finc      = 17'(29080 + $urandom_range(0, 40000));
      harmonic2 = seg[0];
      phase_ofs = 16'($urandom);
      delay     = (seg < 4) ? 8'd0 : 8'($urandom_range(2, 200));
      repeat (300) @(posedge clk);   // let the delay line fill with the new settings
      for (int n = 0; n < 200; n++) begin
        @(negedge clk);
        check_point(int'(delay), harmonic2, phase_ofs);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // history of the reference accumulator value: hist[k] = acc k clocks ago
  always @(posedge clk) begin
    for (int k = 255; k > 0; k--) hist[k] <= hist[k-1];
    hist[0] <= 32'(ref_acc);
  end
  initial for (int k = 0; k < 256; k++) hist[k] = '0;
endmodule
