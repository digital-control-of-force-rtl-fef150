// biquad: one second-order IIR section of the controller filter.
//
// The section evaluates the difference equation
//   y(n) = ( b0 x(n) + b1 x(n-1) + b2 x(n-2) - a1 y(n-1) - a2 y(n-2) ) / a0
// in direct form I, keeping the two previous inputs and outputs. Signals and
// the six coefficients are 24-bit two's-complement integers and the sum of
// the five 48-bit products is formed in a 50-bit accumulator; these widths,
// the equation and the three-plus-three coefficients follow the published
// controller. The coefficient sets the host loads use a0 = -2**22, so the
// division by a0 is a right shift by COEF_SHIFT followed by a negation when
// a0 is negative; only the sign of a0 is read. That reading of a0, the
// direct-form-I structure, floor rounding and saturating the result to 24
// bits (rather than wrapping) are this design's choices.
//
// Interface: coeffs is read on every sample, so the host may change it while
// the filter runs. Timing: all five products are formed in parallel; out_data
// and out_valid appear one clock after in_valid, so the section keeps up even
// at one sample per clock. Reset clears the four history registers.
module biquad
  import cc_pkg::*;
#(
  parameter int DATA_BITS  = DATA_W,
  parameter int COEF_BITS  = COEF_W,
  parameter int ACC_BITS   = ACC_W,
  parameter int COEF_SHIFT = 22
) (
  input  logic                        clk,
  input  logic                        rst,
  input  biquad_coeffs_t              coeffs,
  input  logic                        in_valid,
  input  logic signed [DATA_BITS-1:0] in_data,
  output logic                        out_valid,
  output logic signed [DATA_BITS-1:0] out_data
);

  localparam logic signed [ACC_BITS-1:0] Y_MAX = ACC_BITS'(  (64'sd1 <<< (DATA_BITS-1)) - 1);
  localparam logic signed [ACC_BITS-1:0] Y_MIN = ACC_BITS'(-(64'sd1 <<< (DATA_BITS-1)));

  logic signed [DATA_BITS-1:0] x1, x2, y1, y2;
  logic signed [ACC_BITS-1:0]  acc, scaled, y_full;
  logic signed [DATA_BITS-1:0] y_sat;

  always_comb begin
    acc = ACC_BITS'($signed(coeffs.b0) * in_data)
        + ACC_BITS'($signed(coeffs.b1) * x1)
        + ACC_BITS'($signed(coeffs.b2) * x2)
        - ACC_BITS'($signed(coeffs.a1) * y1)
        - ACC_BITS'($signed(coeffs.a2) * y2);
    scaled = acc >>> COEF_SHIFT;
    y_full = coeffs.a0[COEF_BITS-1] ? -scaled : scaled;
    if (y_full > Y_MAX)      y_sat = DATA_BITS'(Y_MAX);
    else if (y_full < Y_MIN) y_sat = DATA_BITS'(Y_MIN);
    else                     y_sat = DATA_BITS'(y_full);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      x1 <= '0; x2 <= '0; y1 <= '0; y2 <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        x2 <= x1;  x1 <= in_data;
        y2 <= y1;  y1 <= y_sat;
        out_data <= y_sat;
      end
    end
  end

  initial assert (2 * DATA_BITS <= ACC_BITS && 2 * COEF_BITS <= ACC_BITS)
    else $error("biquad: accumulator narrower than one product");

endmodule
