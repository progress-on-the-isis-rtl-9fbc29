// cordic -- pipelined vectoring CORDIC: phase and magnitude of an (I, Q)
// vector.
//
// A first stage folds the vector into the right half plane (rotating by half
// a turn when I < 0). Each of the STAGES following stages rotates the vector
// by +-atan(2^-k), using only shifts and adds, so as to drive Q to zero, and
// accumulates the rotation. The result is phase = atan2(Q, I) in 16-bit
// turns (2^16 = 360 degrees) and the magnitude times the CORDIC gain
// (about 1.647). GUARD extra fraction bits keep small vectors accurate. One vector is accepted per clock; the result and
// 'out_valid' appear STAGES + 1 clocks after 'in_valid'.
// A CORDIC producing the beam phase from I and Q is the published method; the
// pipelined form and its word lengths are this design's choices.
module cordic
  import llrf_pkg::*;
#(
  parameter int STAGES = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  sample_t              i_i,
  input  sample_t              q_i,
  input  logic                 in_valid,
  output logic [15:0]          phase,
  output logic [SAMPLE_W:0]    mag,
  output logic                 out_valid
);
  localparam int GUARD = 4;                 // fraction bits kept below the input LSB
  localparam int XW    = SAMPLE_W + 3 + GUARD;

  // atan(2^-k) in 16-bit turns
  localparam logic [15:0] ATAN [16] = '{16'd8192, 16'd4836, 16'd2555, 16'd1297,
                                        16'd651,  16'd326,  16'd163,  16'd81,
                                        16'd41,   16'd20,   16'd10,   16'd5,
                                        16'd3,    16'd1,    16'd1,    16'd0};

  logic signed [XW-1:0] x [STAGES+1];
  logic signed [XW-1:0] y [STAGES+1];
  logic        [15:0]   z [STAGES+1];
  logic                 v [STAGES+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= STAGES; k++) begin
        x[k] <= '0;
        y[k] <= '0;
        z[k] <= '0;
        v[k] <= 1'b0;
      end
    end else begin
      // stage 0: fold into the right half plane
      v[0] <= in_valid;
      if (i_i < 0) begin
        x[0] <= -(XW'(i_i) <<< GUARD);
        y[0] <= -(XW'(q_i) <<< GUARD);
        z[0] <= 16'h8000;
      end else begin
        x[0] <= XW'(i_i) <<< GUARD;
        y[0] <= XW'(q_i) <<< GUARD;
        z[0] <= 16'h0000;
      end
      for (int k = 0; k < STAGES; k++) begin
        v[k+1] <= v[k];
        if (y[k] >= 0) begin
          x[k+1] <= x[k] + (y[k] >>> k);
          y[k+1] <= y[k] - (x[k] >>> k);
          z[k+1] <= z[k] + ATAN[k % 16];
        end else begin
          x[k+1] <= x[k] - (y[k] >>> k);
          y[k+1] <= y[k] + (x[k] >>> k);
          z[k+1] <= z[k] - ATAN[k % 16];
        end
      end
    end
  end

  assign phase     = z[STAGES];
  assign mag       = (SAMPLE_W+1)'(x[STAGES] >>> GUARD);
  assign out_valid = v[STAGES];
endmodule
