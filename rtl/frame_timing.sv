// frame_timing -- machine frame counting and parameter pulsing.
//
// The FLG FPGA receives the machine frame start trigger (50 Hz) and the
// TS1/TS2 destination of each frame and distributes them to the LO FPGAs.
// This block counts frames modulo FRAMES (640) and marks every
// 'pulse_div'-th frame (1 .. FRAMES; 0 acts as 1) as a pulsed frame, on which
// an LO may use an alternate, experimental parameter value: pulsing from
// 50 Hz down to 50/640 Hz. The first frame after reset is frame 0 and is
// pulsed. Outputs change one clock after 'frame_start_in' and hold for the
// frame; 'frame_start' is a one-clock pulse and 'frame_toggle' changes at
// each frame start, for crossing into another clock domain.
// The 50/640 Hz range and the TS1/TS2 distinction are published; the counter
// and the flags are this design's choices.
module frame_timing #(
  parameter int FRAMES = 640
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        frame_start_in,
  input  logic                        ts2_in,
  input  logic [$clog2(FRAMES)-1:0]   pulse_div,
  output logic                        frame_start,
  output logic                        frame_toggle,
  output logic [$clog2(FRAMES)-1:0]   frame_no,
  output logic                        pulse_frame,
  output logic                        ts2
);
  localparam int FW = $clog2(FRAMES);
  logic [FW-1:0] pcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_start  <= 1'b0;
      frame_toggle <= 1'b0;
      frame_no     <= FW'(FRAMES - 1);
      pcnt         <= '0;
      pulse_frame  <= 1'b0;
      ts2          <= 1'b0;
    end else begin
      frame_start <= frame_start_in;
      if (frame_start_in) begin
        frame_toggle <= ~frame_toggle;
        frame_no     <= (frame_no == FW'(FRAMES - 1)) ? '0 : frame_no + 1'b1;
        pulse_frame  <= (pcnt == '0);
        pcnt         <= (pcnt + 1'b1 >= pulse_div) ? '0 : pcnt + 1'b1;
        ts2          <= ts2_in;
      end
    end
  end
endmodule
