// cc_pkg: types and constants shared by the cantilever controller.
//
// The signal path carries 24-bit two's-complement samples and every biquad
// coefficient is a 24-bit two's-complement integer, as in the published
// controller. The 12-bit ADC and 14-bit DAC widths are those of the AD9862
// codec. The register map and the multiplexer encoding are this design's own
// choices; the published design only says that the host writes the
// coefficients and the multiplexer setting into FPGA registers.
package cc_pkg;

  localparam int ADC_W   = 12;  // ADC resolution
  localparam int DAC_W   = 14;  // DAC resolution
  localparam int DATA_W  = 24;  // signal word
  localparam int COEF_W  = 24;  // coefficient word
  localparam int ACC_W   = 50;  // widest intermediate result
  localparam int DECIM_W = 16;  // width of the decimation ratio register

  // Multiplexer setting: one enable bit per input; both set adds them.
  typedef enum logic [1:0] {
    MUX_NONE = 2'b00,
    MUX_RX   = 2'b01,
    MUX_REF  = 2'b10,
    MUX_SUM  = 2'b11
  } mux_sel_t;

  // Coefficients of one second-order section, in the order the host
  // writes them. a0 must be +/-2**COEF_SHIFT (see biquad.sv).
  typedef struct packed {
    logic signed [COEF_W-1:0] b0;
    logic signed [COEF_W-1:0] b1;
    logic signed [COEF_W-1:0] b2;
    logic signed [COEF_W-1:0] a0;
    logic signed [COEF_W-1:0] a1;
    logic signed [COEF_W-1:0] a2;
  } biquad_coeffs_t;

  // Register map of the host settings bus.
  localparam int REG_ADDR_W     = 7;
  localparam int REG_MUX        = 0;
  localparam int REG_DECIM      = 1;
  localparam int REG_COEF_BASE  = 2;   // section s, coefficient k: 2 + 6*s + k
  localparam int COEFS_PER_SECT = 6;   // b0 b1 b2 a0 a1 a2

  localparam int DEFAULT_DECIM  = 128; // 64 MHz / 128 = 500 kHz

endpackage
