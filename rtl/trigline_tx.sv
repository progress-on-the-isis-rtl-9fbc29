// trigline_tx -- broadcasts the F_inc word to the LO FPGAs over four PXIe
// trigger lines.
//
// Each line carries one bit per beat at 20 Mbit/s (CLK_PER_BIT clocks of the
// 120 MHz FLG clock). A frame is one start beat with all four lines high,
// five data beats carrying the 17-bit word four bits at a time, least
// significant nibble first (the three unused bits of the last beat are low),
// and GAP_BEATS idle beats with all lines low. The word is sampled at the
// start beat, so the LOs see a new F_inc every 8 beats (400 ns) with the
// defaults. 'sent' pulses for one clock when the last data beat ends.
// Sending the 17-bit word over four trigger lines at a 20 MHz bit clock follows
// the published design; the start beat and the frame layout are this design's.
module trigline_tx
  import llrf_pkg::*;
#(
  parameter int CLK_PER_BIT = 6,
  parameter int GAP_BEATS   = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [FINC_W-1:0]       finc,
  output logic [N_TRIG_LINES-1:0] trig,
  output logic                    sent
);
  localparam int DATA_BEATS = (FINC_W + N_TRIG_LINES - 1) / N_TRIG_LINES; // 5
  localparam int FRAME      = 1 + DATA_BEATS + GAP_BEATS;

  logic [$clog2(CLK_PER_BIT)-1:0]          div;
  logic [$clog2(FRAME)-1:0]                beat;
  logic [DATA_BEATS*N_TRIG_LINES-1:0]      shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div   <= '0;
      beat  <= $bits(beat)'(DATA_BEATS + 1);        // start in the idle gap
      shreg <= '0;
      trig  <= '0;
      sent  <= 1'b0;
    end else begin
      sent <= 1'b0;
      if (div == $bits(div)'(CLK_PER_BIT - 1)) begin
        div <= '0;
        // next beat begins
        if (beat == $bits(beat)'(FRAME - 1)) beat <= '0;
        else                                 beat <= beat + 1'b1;
        if (beat == $bits(beat)'(DATA_BEATS)) sent <= 1'b1;
      end else begin
        div <= div + 1'b1;
      end
      // drive the lines for the beat that starts on the next clock
      if (div == $bits(div)'(CLK_PER_BIT - 1)) begin
        if (beat == $bits(beat)'(FRAME - 1)) begin
          trig  <= '1;                                    // start beat
          shreg <= $bits(shreg)'(finc);
        end else if (beat < $bits(beat)'(DATA_BEATS)) begin
          trig  <= shreg[N_TRIG_LINES-1:0];               // data beat
          shreg <= shreg >> N_TRIG_LINES;
        end else begin
          trig  <= '0;                                    // idle beat
        end
      end
    end
  end
endmodule
