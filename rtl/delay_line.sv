// delay_line -- programmable pipeline delay of a sample stream.
//
// A circular buffer of 2^DEPTH_W words is written every clock; the read
// pointer trails the write pointer by the requested delay. 'dout' shows the
// 'din' of 'delay' clocks earlier, for delay = 1 .. 2^DEPTH_W - 1; a delay of
// 0 behaves as 1 (a plain register). The delay may be changed at any time;
// the output is then the stored sample at the new distance.
// The design uses it for the pipeline delay in front of the tuning-loop DAC,
// which stands in for the cable and amplifier delay of the grid signal path,
// and inside the delayed DDS. The buffer implementation and depth are this
// design's choices.
module delay_line #(
  parameter int W       = 16,
  parameter int DEPTH_W = 8
) (
  input  logic               clk,
  input  logic [W-1:0]       din,
  input  logic [DEPTH_W-1:0] delay,
  output logic [W-1:0]       dout
);
  logic [W-1:0]       buf_q [2**DEPTH_W];
  logic [DEPTH_W-1:0] wptr;
  logic [DEPTH_W-1:0] raddr;

  assign raddr = wptr - delay + 1'b1;

  always_ff @(posedge clk) begin
    buf_q[wptr] <= din;
    wptr        <= wptr + 1'b1;
    if (delay <= DEPTH_W'(1)) dout <= din;
    else                      dout <= buf_q[raddr];
  end
endmodule
