// tb_trigline -- the F_inc trigger-line link end to end: a transmitter on a
// 120 MHz clock and a receiver on an unrelated 250 MHz clock. Random words
// are sent; each received word must equal the word sent in that frame, in
// order, with none lost. Also checks the frame period (8 beats of 6 clocks,
// 400 ns) and that 20 Mbit/s is the rate on each line.
module tb_trigline;
  import llrf_pkg::*;
  logic clk_tx = 0, clk_rx = 0, rst_n = 0;
  logic [16:0] finc_in, finc_out;
  logic [3:0]  trig;
  logic        sent, finc_valid;
  int checks = 0, failures = 0;
  logic [16:0] q [$];
  realtime last_sent = 0;
  int nsent = 0, nrecv = 0;

  always #4167ps clk_tx = ~clk_tx;  // 120 MHz
  always #2000ps clk_rx = ~clk_rx;  // 250 MHz

  trigline_tx tx (.clk(clk_tx), .rst_n, .finc(finc_in), .trig, .sent);
  trigline_rx rx (.clk(clk_rx), .rst_n, .trig, .finc(finc_out), .finc_valid);

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a new word is offered after each frame; the next start beat takes it
  always @(posedge clk_tx) if (sent) begin
    finc_in <= 17'($urandom);
  end
  always @(finc_in) q.push_back(finc_in);

  always @(posedge clk_tx) if (sent) begin
    if (nsent > 0) begin
      checks++;
      if ($realtime - last_sent < 399ns || $realtime - last_sent > 401ns) begin
        failures++; $display("FAIL frame period %0t", $realtime - last_sent);
      end
    end
    last_sent = $realtime;
    nsent++;
  end

  always @(posedge clk_rx) if (finc_valid) begin
    logic [16:0] e;
    nrecv++;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected word %h", finc_out); end
    else begin
      e = q.pop_front();
      if (finc_out !== e) begin failures++; $display("FAIL got %h exp %h", finc_out, e); end
    end
  end

  initial begin
    finc_in = 17'h1ABCD;
    #20ns rst_n = 1;
    #100us;
    checks++;
    if (nrecv < 245) begin failures++; $display("FAIL only %0d words received", nrecv); end
    $display("sent %0d received %0d", nsent, nrecv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
