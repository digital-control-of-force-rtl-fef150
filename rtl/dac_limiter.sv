// dac_limiter: output stage from the 24-bit filter word to the 14-bit DAC.
//
// The filter output is shifted right by OUT_SHIFT and then limited to the
// DAC's range instead of being allowed to wrap, since a converter that wraps
// an overranged code would turn a large positive drive into a large negative
// one. Limiting the output to the converter range follows the published
// controller, which writes it as y_out = max(min(y, C_da), 0) for an
// offset-binary DAC. The DAC word here is two's complement, so the limits are
// -2**13 and 2**13-1; inverting the MSB gives the offset-binary code. The
// shift OUT_SHIFT = 6 is our own choice: the ADC (12 bits) and DAC (14 bits)
// both span 2 V peak-to-peak, so with the input shifted by 8 a filter of unity
// gain gives equal voltages at RX and TX.
//
// Timing: dac_out is registered one clock after in_valid and held until the
// next sample, which is the zero-order hold in front of the DAC. sat_hi and
// sat_lo pulse for one clock when that sample was limited. Reset puts the DAC
// at mid-scale (code 0).
module dac_limiter
  import cc_pkg::*;
#(
  parameter int DATA_BITS = DATA_W,
  parameter int DAC_BITS  = DAC_W,
  parameter int OUT_SHIFT = 6
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic signed [DATA_BITS-1:0] in_data,
  output logic signed [DAC_BITS-1:0]  dac_out,
  output logic                        sat_hi,
  output logic                        sat_lo
);

  localparam logic signed [DATA_BITS-1:0] D_MAX = DATA_BITS'(  (32'sd1 <<< (DAC_BITS-1)) - 1);
  localparam logic signed [DATA_BITS-1:0] D_MIN = DATA_BITS'(-(32'sd1 <<< (DAC_BITS-1)));

  logic signed [DATA_BITS-1:0] shifted;
  logic                        over, under;

  always_comb begin
    shifted = in_data >>> OUT_SHIFT;
    over    = shifted > D_MAX;
    under   = shifted < D_MIN;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      dac_out <= '0;
      sat_hi  <= 1'b0;
      sat_lo  <= 1'b0;
    end else begin
      sat_hi <= in_valid && over;
      sat_lo <= in_valid && under;
      if (in_valid) begin
        if (over)       dac_out <= DAC_BITS'(D_MAX);
        else if (under) dac_out <= DAC_BITS'(D_MIN);
        else            dac_out <= DAC_BITS'(shifted);
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) !(sat_hi && sat_lo));

endmodule
