// llrf_pkg -- widths, types and the host register map shared by the
// frequency law generator (FLG) FPGA, the local oscillator (LO) FPGAs and
// the system top.
//
// The 17-bit frequency increment word (F_inc), the four trigger lines that
// carry it and the 10000-point scope channels are the published figures of
// the system; every other width and the register map are this design's own
// choices. Samples inside the FPGAs are 16-bit signed; ADC samples are
// 14-bit signed; a phase of 2^16 (16-bit) or 2^32 (32-bit) is one turn.
package llrf_pkg;

  localparam int FINC_W       = 17;    // frequency increment word
  localparam int N_TRIG_LINES = 4;     // PXIe trigger lines used for F_inc
  localparam int ADC_W        = 14;    // ADC sample width
  localparam int SAMPLE_W     = 16;    // internal sample width
  localparam int PHASE_W      = 32;    // DDS phase accumulator width
  localparam int SCOPE_POINTS = 10000; // points per virtual scope channel
  localparam int SCOPE_CH     = 4;     // channels per virtual scope
  localparam int SCOPE_SRC    = 8;     // selectable signals per FPGA

  typedef logic [FINC_W-1:0]          finc_t;
  typedef logic signed [ADC_W-1:0]    adc_t;
  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic [PHASE_W-1:0]         phase_t;

  // Host register bus: one write strobe, a FPGA select, a 16-bit address and
  // 32-bit data, plus a read path for the scope buffers.
  // Address bits [15:12] select a region inside one FPGA.
  localparam logic [3:0] REG_CTRL  = 4'h0; // control registers, addr[7:0]
  localparam logic [3:0] REG_PROF0 = 4'h1; // function profile 0 (trim / theta)
  localparam logic [3:0] REG_PROF1 = 4'h2; // function profile 1 (amplitude demand)
  localparam logic [3:0] REG_LUT   = 4'h3; // frequency law table (FLG only)

  // FLG control registers (REG_CTRL region)
  localparam logic [7:0] FLG_GAIN_BPL   = 8'h00;
  localparam logic [7:0] FLG_GAIN_BLL   = 8'h01;
  localparam logic [7:0] FLG_GAIN_RAD   = 8'h02;
  localparam logic [7:0] FLG_GAIN_TRIM  = 8'h03;
  localparam logic [7:0] FLG_BDOT_OFS   = 8'h04;
  localparam logic [7:0] FLG_MODE       = 8'h05; // bit0: digital beam phase loop
  localparam logic [7:0] FLG_STEP       = 8'h06; // profile step, clocks
  localparam logic [7:0] FLG_PULSE_DIV  = 8'h07; // pulse every N frames
  localparam logic [7:0] FLG_WCM_DELAY  = 8'h08; // delayed DDS delay
  localparam logic [7:0] FLG_SCOPE_SEL  = 8'h09; // 4 x 3-bit source select
  localparam logic [7:0] FLG_SCOPE_DEC  = 8'h0A; // clocks per scope point
  localparam logic [7:0] FLG_WCM_SCALE  = 8'h0B; // WCM ADC gain, Q4.12

  // LO control registers (REG_CTRL region)
  localparam logic [7:0] LO_MODE        = 8'h00; // bit0 closed loop, bit1 2RF doubler, bit2 beam FF, bit3 alt demand on pulsed frame, bit4 alt demand on TS2 frame
  localparam logic [7:0] LO_PHASE_OFS   = 8'h01; // cavity phase offset, 2^16 = turn
  localparam logic [7:0] LO_KP_I        = 8'h02;
  localparam logic [7:0] LO_KI_I        = 8'h03;
  localparam logic [7:0] LO_KP_Q        = 8'h04;
  localparam logic [7:0] LO_KI_Q        = 8'h05;
  localparam logic [7:0] LO_DEMAND_SC   = 8'h06; // amplitude demand scale, Q4.12
  localparam logic [7:0] LO_DEMAND_ALT  = 8'h07; // alternate demand scale
  localparam logic [7:0] LO_GV_SCALE    = 8'h08; // gap volts ADC gain, Q4.12
  localparam logic [7:0] LO_WCM_SCALE   = 8'h09; // WCM ADC gain, Q4.12
  localparam logic [7:0] LO_GV_DELAY    = 8'h0A; // gap volts reference delay
  localparam logic [7:0] LO_WCM_DELAY   = 8'h0B; // WCM reference delay
  localparam logic [7:0] LO_OUT_DELAY   = 8'h0C; // DAC 1 pipeline delay
  localparam logic [7:0] LO_STEP        = 8'h0D; // profile step, clocks
  localparam logic [7:0] LO_SCOPE_SEL   = 8'h0E;
  localparam logic [7:0] LO_SCOPE_DEC   = 8'h0F;

  // Saturate a wide signed value to W bits.
  function automatic logic signed [31:0] sat_w(input logic signed [63:0] v, input int w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi)      return 32'(hi);
    else if (v < lo) return 32'(lo);
    else             return 32'(v);
  endfunction

endpackage
