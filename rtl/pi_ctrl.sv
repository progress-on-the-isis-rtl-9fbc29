// pi_ctrl -- proportional-integral controller for one IQ component.
//
// On each 'pv_valid' strobe the error e = setpoint - pv is formed; the
// integrator adds ki * e (ki has KI_SHIFT fractional bits) and is clamped to
// the 16-bit output range (anti-windup); the output is
// u = kp * e / 2^KP_SHIFT + integrator, saturated to 16 bits.
// With 'closed_loop' low the controller is open loop: u follows the setpoint
// and the integrator is preloaded with it, so closing the loop does not
// bump the output. Timing: u is registered and changes one clock after
// pv_valid. Separate I and Q PI loops with host-set gains and an open/closed
// loop switch follow the published design; the number formats, the
// anti-windup and the open-loop behaviour are this design's choices.
module pi_ctrl
  import llrf_pkg::*;
#(
  parameter int KP_SHIFT = 8,
  parameter int KI_SHIFT = 12
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t setpoint,
  input  sample_t pv,
  input  logic    pv_valid,
  input  sample_t kp,
  input  sample_t ki,
  input  logic    closed_loop,
  output sample_t u
);
  localparam int IW = SAMPLE_W + KI_SHIFT + 1;
  localparam logic signed [IW-1:0] IMAX = IW'(32767) <<< KI_SHIFT;
  localparam logic signed [IW-1:0] IMIN = IW'(-32768) <<< KI_SHIFT;

  logic signed [SAMPLE_W:0] e;
  logic signed [IW-1:0]     integ;
  logic signed [47:0]       integ_nx;
  logic signed [47:0]       p_term;
  logic signed [47:0]       u_nx;

  assign e        = (SAMPLE_W+1)'(setpoint) - (SAMPLE_W+1)'(pv);
  assign integ_nx = 48'(integ) + 48'(e) * 48'(ki);
  assign p_term   = (48'(e) * 48'(kp)) >>> KP_SHIFT;
  assign u_nx     = p_term + 48'(integ_nx >>> KI_SHIFT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ <= '0;
      u     <= '0;
    end else if (!closed_loop) begin
      integ <= IW'(setpoint) <<< KI_SHIFT;
      u     <= setpoint;
    end else if (pv_valid) begin
      if (integ_nx > 48'(IMAX))      integ <= IMAX;
      else if (integ_nx < 48'(IMIN)) integ <= IMIN;
      else                           integ <= IW'(integ_nx);
      u <= sample_t'(sat_w(64'(u_nx), SAMPLE_W));
    end
  end
endmodule
