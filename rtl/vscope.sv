// vscope -- virtual oscilloscope capture buffer.
//
// Each FPGA offers SCOPE_SRC internal signals; four of them, chosen by 'sel'
// (3 bits per channel), are recorded from each trigger (the frame start),
// one point every 'decim' clocks (0 counts as 1), until POINTS points per
// channel have been stored. 'done' then rises and stays high until the next
// trigger; a trigger during a capture restarts it. The controller reads the
// buffers through 'rd_ch'/'rd_addr'; 'rd_data' is registered, one clock.
// Four selectable 10000-point channels per FPGA follow the published design;
// capturing into a buffer read over the host port, rather than streaming, is
// this design's choice.
module vscope
  import llrf_pkg::*;
#(
  parameter int POINTS = SCOPE_POINTS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  sample_t                     src [SCOPE_SRC],
  input  logic [3*SCOPE_CH-1:0]       sel,
  input  logic [15:0]                 decim,
  input  logic                        trigger,
  input  logic [1:0]                  rd_ch,
  input  logic [$clog2(POINTS)-1:0]   rd_addr,
  output sample_t                     rd_data,
  output logic                        done
);
  localparam int AW = $clog2(POINTS);

  logic          running;
  logic [AW-1:0] widx;
  logic [15:0]   dcnt;
  logic          take;

  assign take = running && (dcnt + 16'd1 >= decim);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      done    <= 1'b0;
      widx    <= '0;
      dcnt    <= '0;
    end else if (trigger) begin
      running <= 1'b1;
      done    <= 1'b0;
      widx    <= '0;
      dcnt    <= '0;
    end else if (running) begin
      if (take) begin
        dcnt <= '0;
        if (widx == AW'(POINTS - 1)) begin
          running <= 1'b0;
          done    <= 1'b1;
        end else begin
          widx <= widx + 1'b1;
        end
      end else begin
        dcnt <= dcnt + 1'b1;
      end
    end
  end

  // one plain single-port-write memory per channel, read through a register
  sample_t    rdq [SCOPE_CH];
  logic [1:0] rd_ch_q;
  for (genvar c = 0; c < SCOPE_CH; c++) begin : g_ch
    sample_t mem [POINTS];
    sample_t wsrc;
    assign wsrc = src[sel[3*c +: 3]];
    always_ff @(posedge clk) begin
      if (take && !trigger) mem[widx] <= wsrc;
      rdq[c] <= mem[rd_addr];
    end
  end
  always_ff @(posedge clk) rd_ch_q <= rd_ch;
  assign rd_data = rdq[rd_ch_q];
endmodule
