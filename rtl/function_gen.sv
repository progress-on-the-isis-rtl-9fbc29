// function_gen -- plays a function profile out over the machine cycle.
//
// The control system supplies time profiles (the frequency law trim, the
// theta phase of the second harmonic cavities, the gap volts amplitude
// demand). The host writes up to 2^LEN_W 16-bit points; from each frame start
// the generator steps through them, one point every 'step_cycles' clocks
// (0 counts as 1), and holds the last point after the end of the table.
// Timing: 'value' is registered; point 0 appears one clock after
// 'frame_start'. Profiles supplied by the control system follow the published
// design; the table length and the stepping are this design's choices.
module function_gen
  import llrf_pkg::*;
#(
  parameter int LEN_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             frame_start,
  input  logic             wr_en,
  input  logic [LEN_W-1:0] wr_addr,
  input  sample_t          wr_data,
  input  logic [15:0]      step_cycles,
  output sample_t          value
);
  sample_t          prof [2**LEN_W];
  logic [LEN_W-1:0] idx;
  logic [15:0]      cnt;

  always_ff @(posedge clk) begin
    if (wr_en) prof[wr_addr] <= wr_data;
    value <= prof[frame_start ? '0 : idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0;
      cnt <= '0;
    end else if (frame_start) begin
      idx <= '0;
      cnt <= '0;
    end else if (cnt + 16'd1 >= step_cycles) begin
      cnt <= '0;
      if (idx != '1) idx <= idx + 1'b1;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end
endmodule
