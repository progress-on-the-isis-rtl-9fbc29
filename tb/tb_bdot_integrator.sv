// tb_bdot_integrator -- checks the B-dot integrator against a reference sum
// computed in the testbench: random B-dot samples and offsets, clearing at
// frame start, and saturation of the output.
module tb_bdot_integrator;
  logic clk = 0, rst_n = 0, frame_start = 0;
  logic signed [13:0] bdot = '0, offset = '0;
  logic signed [15:0] b_field;
  int checks = 0, failures = 0;
  longint ref_acc, prev_acc;

  always #4 clk = ~clk;

  bdot_integrator dut (.clk, .rst_n, .frame_start, .bdot, .offset, .b_field);

  function automatic logic signed [15:0] ref_out(longint a);
    longint s = a >>> 18;
    if (s > 32767) return 16'sd32767;
    if (s < -32768) return -16'sd32768;
    return 16'(s);
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    ref_acc = 0;
    prev_acc = 0;
    offset = 14'sd100;
    // ramp: constant B-dot for 40000 clocks, checking each clock
    for (int t = 0; t < 60000; t++) begin
      @(negedge clk);
      if (t % 1000 == 0 && t > 0) begin
        if (b_field !== ref_out(prev_acc)) begin
          failures++;
          $display("FAIL t=%0d b=%0d exp=%0d", t, b_field, ref_out(prev_acc));
        end
        checks++;
      end
      bdot = (t < 40000) ? 14'sd8191 : 14'(-8000 + int'($urandom_range(0, 200)));
      @(posedge clk);
      prev_acc = ref_acc;
      ref_acc += longint'(bdot) - longint'(offset);
    end
    // frame start clears
    @(negedge clk); frame_start = 1; @(posedge clk); ref_acc = 0; @(negedge clk); frame_start = 0;
    bdot = 14'sd100;  // equals offset: integral stays 0
    repeat (10) @(posedge clk);
    @(negedge clk);
    checks++; if (b_field !== 16'sd0) begin failures++; $display("FAIL clear b=%0d", b_field); end
    // saturation: integrate full scale long enough to exceed 16 bits
    bdot = 14'sd8191; offset = -14'sd8192;
    repeat (1100000) @(posedge clk);
    @(negedge clk);
    checks++; if (b_field !== 16'sd32767) begin failures++; $display("FAIL sat b=%0d", b_field); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
