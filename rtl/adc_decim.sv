// adc_decim -- decimation and scaling of an LO ADC stream.
//
// DECIM consecutive ADC samples (a power of two) are summed and divided by
// DECIM (a boxcar average that also filters), then multiplied by the signed
// gain 'scale' with 12 fractional bits and saturated to 16 bits. 'dvalid'
// pulses for one clock with each output sample, every DECIM clocks, one clock
// after the last input sample of the group. Decimating and scaling the
// digitised gap volts signal before the demodulator follows the published
// design; the factor and the averaging filter are this design's choices.
module adc_decim
  import llrf_pkg::*;
#(
  parameter int DECIM = 2,
  parameter int IN_W  = 14
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [IN_W-1:0] adc,
  input  sample_t                scale,
  output sample_t                dout,
  output logic                   dvalid
);
  localparam int SH = $clog2(DECIM);

  logic signed [IN_W+SH:0]  acc;
  logic signed [IN_W+SH:0]  sum;
  logic [(SH > 0 ? SH : 1)-1:0] cnt;
  logic signed [IN_W+SH:0]  avg;
  logic signed [47:0]       prod;

  assign sum  = acc + (IN_W+SH+1)'(adc);
  assign avg  = sum >>> SH;
  assign prod = (48'(avg) <<< (16 - IN_W)) * 48'(scale);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc    <= '0;
      cnt    <= '0;
      dout   <= '0;
      dvalid <= 1'b0;
    end else begin
      dvalid <= 1'b0;
      if (SH == 0 || cnt == $bits(cnt)'(DECIM - 1)) begin
        cnt    <= '0;
        acc    <= '0;
        dout   <= sample_t'(sat_w(64'(prod >>> 12), SAMPLE_W));
        dvalid <= 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
        acc <= sum;
      end
    end
  end
endmodule
