// tb_function_gen -- loads a profile (point k = 37k - 9000), plays it with
// step lengths 1, 3 and 7 clocks, and checks every output value and its
// timing against the point index expected from the clock count since frame
// start; also that the last point is held and that frame start restarts.
module tb_function_gen;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, frame_start = 0, wr_en = 0;
  logic [9:0] wr_addr = '0;
  sample_t wr_data = '0, value;
  logic [15:0] step_cycles = 16'd1;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;
  function_gen dut (.*);

  function automatic sample_t pt(int k); return sample_t'(37 * k - 9000); endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int steps [3] = '{1, 3, 7};
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < 1024; k++) begin
      wr_en = 1; wr_addr = 10'(k); wr_data = pt(k); @(negedge clk);
    end
    wr_en = 0;
    foreach (steps[s]) begin
      step_cycles = 16'(steps[s]);
      frame_start = 1; @(negedge clk); frame_start = 0;
      // after the frame-start clock, clock c (c = 0, 1, ...) shows point
      // min(floor((c - 1) / step), 1023) for c >= 1; c = 0 shows point 0
      for (int c = 0; c < 1030 * steps[s]; c++) begin
        int k;
        k = (c == 0) ? 0 : (c - 1) / steps[s];
        if (k > 1023) k = 1023;
        if (c % 5 == 0 || c > 1020 * steps[s]) begin
          checks++;
          if (value !== pt(k)) begin failures++; $display("FAIL step %0d c=%0d v=%0d exp %0d", steps[s], c, value, pt(k)); end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
