// trigline_rx -- receives the F_inc word from the four PXIe trigger lines in
// the LO clock domain.
//
// The lines come from another FPGA and are asynchronous to this clock: each
// passes a two-flop synchroniser. The receiver waits, armed, for the lines to
// be low and then for all four to go high (the start beat). It checks the
// start beat again at its centre, then samples the five data beats at their
// centres, CLK_PER_BIT clocks apart, assembling the word least significant
// nibble first. The new word appears on 'finc' with a one-clock
// 'finc_valid' pulse after the last data beat has been sampled; between
// updates the last word is held. With the defaults (250 MHz clock, 20 MHz
// bits of 12.5 clocks) sampling drifts by at most three clocks over a frame,
// well inside a bit. Receiving the word from four trigger lines follows the
// published design; the framing and sampling scheme are this design's.
module trigline_rx
  import llrf_pkg::*;
#(
  parameter int CLK_PER_BIT = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_TRIG_LINES-1:0] trig,
  output logic [FINC_W-1:0]       finc,
  output logic                    finc_valid
);
  localparam int DATA_BEATS = (FINC_W + N_TRIG_LINES - 1) / N_TRIG_LINES;
  localparam int CNT_W      = $clog2(2 * CLK_PER_BIT);

  typedef enum logic [1:0] {S_WAIT_IDLE, S_ARMED, S_START, S_DATA} state_t;

  logic [N_TRIG_LINES-1:0]            s1, s2;
  state_t                             state;
  logic [CNT_W-1:0]                   cnt;
  logic [$clog2(DATA_BEATS+1)-1:0]    beat;
  logic [(DATA_BEATS-1)*N_TRIG_LINES-1:0] shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
    end else begin
      s1 <= trig;
      s2 <= s1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_WAIT_IDLE;
      cnt        <= '0;
      beat       <= '0;
      shreg      <= '0;
      finc       <= '0;
      finc_valid <= 1'b0;
    end else begin
      finc_valid <= 1'b0;
      case (state)
        S_WAIT_IDLE: if (s2 == '0) state <= S_ARMED;
        S_ARMED: if (s2 == '1) begin
          state <= S_START;
          cnt   <= CNT_W'(CLK_PER_BIT / 2 - 1);   // to the centre of the start beat
        end
        S_START: begin
          if (cnt == '0) begin
            if (s2 == '1) begin
              state <= S_DATA;
              cnt   <= CNT_W'(CLK_PER_BIT - 1);
              beat  <= '0;
            end else begin
              state <= S_WAIT_IDLE;              // glitch, not a start beat
            end
          end else cnt <= cnt - 1'b1;
        end
        S_DATA: begin
          if (cnt == '0) begin
            shreg <= {s2, shreg[(DATA_BEATS-1)*N_TRIG_LINES-1:N_TRIG_LINES]};
            cnt   <= CNT_W'(CLK_PER_BIT - 1);
            if (beat == $bits(beat)'(DATA_BEATS - 1)) begin
              finc       <= FINC_W'({s2, shreg});
              finc_valid <= 1'b1;
              state      <= S_WAIT_IDLE;
            end
            beat <= beat + 1'b1;
          end else cnt <= cnt - 1'b1;
        end
        default: state <= S_WAIT_IDLE;
      endcase
    end
  end
endmodule
