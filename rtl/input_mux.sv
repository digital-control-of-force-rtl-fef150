// input_mux: input multiplexer and adder of the cantilever controller.
//
// Each of the two ADC inputs, RX (cantilever position) and Ref (reference),
// passes through its own switch into one adder, so the filter can be fed RX,
// Ref, neither, or RX+Ref. These four settings and the switch-plus-adder
// structure follow the published controller. Bit 0 of mux_sel closes the RX
// switch and bit 1 the Ref switch (this encoding is our own).
//
// Each 12-bit two's-complement ADC code is sign-extended to the 24-bit signal
// word and shifted left by IN_SHIFT. With IN_SHIFT = 8 there are 8 fraction
// bits below the ADC's LSB and 4 bits of headroom above its range. The shift
// is our own choice; the published design gives only the 24-bit width.
//
// Timing: the result is registered, one clock after the ADC codes, every
// clock at the full 64 MHz rate. Reset clears the output.
module input_mux
  import cc_pkg::*;
#(
  parameter int ADC_BITS  = ADC_W,
  parameter int DATA_BITS = DATA_W,
  parameter int IN_SHIFT  = 8
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic signed [ADC_BITS-1:0]  adc_rx,
  input  logic signed [ADC_BITS-1:0]  adc_ref,
  input  mux_sel_t                    mux_sel,
  output logic signed [DATA_BITS-1:0] sum_out
);

  logic signed [DATA_BITS-1:0] rx_w, ref_w, sum_d;

  always_comb begin
    rx_w  = mux_sel[0] ? (DATA_BITS'(adc_rx)  <<< IN_SHIFT) : '0;
    ref_w = mux_sel[1] ? (DATA_BITS'(adc_ref) <<< IN_SHIFT) : '0;
    sum_d = rx_w + ref_w;
  end

  always_ff @(posedge clk) begin
    if (rst) sum_out <= '0;
    else     sum_out <= sum_d;
  end

  // The sum of two ADC codes must fit the signal word without wrapping.
  initial assert (ADC_BITS + 1 + IN_SHIFT <= DATA_BITS)
    else $error("input_mux: IN_SHIFT leaves no room for RX+Ref");

endmodule
