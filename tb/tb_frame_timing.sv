// tb_frame_timing -- frame counting modulo 640 and pulsing every N frames
// for N = 1, 5, 640 (50 Hz, 10 Hz, 50/640 Hz), against counts kept in the
// testbench; also the TS2 flag, the frame-start pulse and the toggle.
module tb_frame_timing;
  logic clk = 0, rst_n = 0, frame_start_in = 0, ts2_in = 0;
  logic [9:0] pulse_div = 10'd1, frame_no;
  logic frame_start, frame_toggle, pulse_frame, ts2;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;
  frame_timing dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int divs [3] = '{1, 5, 640};
    int fno, pc, npulse;
    logic tog;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    fno = -1; pc = 0; tog = 0;
    foreach (divs[d]) begin
      pulse_div = 10'(divs[d]);
      npulse = 0;
      for (int f = 0; f < 1300; f++) begin
        bit ep;
        frame_start_in = 1; ts2_in = (f % 5 == 4);
        @(negedge clk);
        frame_start_in = 0;
        fno = (fno + 1) % 640;
        ep = (pc == 0);
        pc = (pc + 1 >= divs[d]) ? 0 : pc + 1;
        tog = ~tog;
        if (ep) npulse++;
        checks++;
        if (frame_no !== 10'(fno) || pulse_frame !== ep || ts2 !== (f % 5 == 4) || !frame_start || frame_toggle !== tog) begin
          failures++; $display("FAIL div %0d f=%0d no=%0d exp %0d pulse %0b exp %0b", divs[d], f, frame_no, fno, pulse_frame, ep);
        end
        repeat (3) @(negedge clk);
        checks++; if (frame_start) begin failures++; $display("FAIL frame_start stuck"); end
      end
      checks++;
      if (npulse != (1300 + divs[d] - 1) / divs[d] && d == 0) begin failures++; $display("FAIL pulses %0d", npulse); end
      $display("div %0d: %0d pulsed frames in 1300", divs[d], npulse);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
