// freq_law_lut -- frequency law look-up table: field B to frequency
// increment F_inc.
//
// The integrated field addresses a table of 2^ADDR_W F_inc words loaded by
// the host; the table holds the machine's frequency law (the RF frequency
// needed at each field so that the beam stays on the design orbit). The top
// ADDR_W bits of the positive range of B form the address; a negative field
// reads entry 0. Write port: one word per clock. Read: registered, F_inc
// appears one clock after B. Mapping B to F_inc by a table follows the
// published design; the table size, addressing and loading are this design's.
module freq_law_lut #(
  parameter int B_W    = 16,
  parameter int ADDR_W = 12,
  parameter int FINC_W = 17
) (
  input  logic                    clk,
  input  logic signed [B_W-1:0]   b_field,
  input  logic                    wr_en,
  input  logic [ADDR_W-1:0]       wr_addr,
  input  logic [FINC_W-1:0]       wr_data,
  output logic [FINC_W-1:0]       finc_law
);
  logic [FINC_W-1:0] table_q [2**ADDR_W];
  logic [ADDR_W-1:0] raddr;

  assign raddr = b_field[B_W-1] ? '0 : b_field[B_W-2 -: ADDR_W];

  always_ff @(posedge clk) begin
    if (wr_en) table_q[wr_addr] <= wr_data;
    finc_law <= table_q[raddr];
  end
endmodule
