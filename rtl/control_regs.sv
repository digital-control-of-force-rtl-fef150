// control_regs: register file the host writes over the USB link.
//
// The host sets the multiplexer, the decimation ratio N and the six
// coefficients of every biquad section while the controller runs; that these
// are host-written registers follows the published controller. The bus and
// the map are our own: a write strobe with a 7-bit address and a 32-bit word,
// as a USB settings interface typically delivers them.
//   address 0           multiplexer setting, bits [1:0] (mux_sel_t)
//   address 1           decimation ratio N, bits [15:0]
//   address 2 + 6*s + k coefficient k of section s, k = b0 b1 b2 a0 a1 a2,
//                       bits [23:0], two's complement
// Writes to other addresses are ignored.
//
// Timing: a write is visible on the outputs one clock after set_stb. Reset
// loads safe defaults: multiplexer off, N = 128 (500 kHz), every section
// with b = 0, a0 = -2**22 and a1 = a2 = 0, so the output is zero until the
// host loads a filter.
module control_regs
  import cc_pkg::*;
#(
  parameter int NUM_SECTIONS = 2,
  parameter int ADDR_W       = REG_ADDR_W
) (
  input  logic                                   clk,
  input  logic                                   rst,
  input  logic                                   set_stb,
  input  logic [ADDR_W-1:0]                      set_addr,
  input  logic [31:0]                            set_data,
  output mux_sel_t                               mux_sel,
  output logic [DECIM_W-1:0]                     decim_n,
  output biquad_coeffs_t [NUM_SECTIONS-1:0]      coeffs
);

  localparam logic [COEF_W-1:0] A0_RESET = COEF_W'(-(32'sd1 <<< 22));

  initial assert (REG_COEF_BASE + COEFS_PER_SECT * NUM_SECTIONS <= (1 << ADDR_W))
    else $error("control_regs: register map does not fit the address space");

  always_ff @(posedge clk) begin
    if (rst) begin
      mux_sel <= MUX_NONE;
      decim_n <= DECIM_W'(DEFAULT_DECIM);
      for (int s = 0; s < NUM_SECTIONS; s++) begin
        coeffs[s]    <= '0;
        coeffs[s].a0 <= A0_RESET;
      end
    end else if (set_stb) begin
      if (int'(set_addr) == REG_MUX)   mux_sel <= mux_sel_t'(set_data[1:0]);
      if (int'(set_addr) == REG_DECIM) decim_n <= set_data[DECIM_W-1:0];
      for (int s = 0; s < NUM_SECTIONS; s++) begin
        for (int k = 0; k < COEFS_PER_SECT; k++) begin
          if (int'(set_addr) == REG_COEF_BASE + COEFS_PER_SECT * s + k) begin
            case (k)
              0:       coeffs[s].b0 <= set_data[COEF_W-1:0];
              1:       coeffs[s].b1 <= set_data[COEF_W-1:0];
              2:       coeffs[s].b2 <= set_data[COEF_W-1:0];
              3:       coeffs[s].a0 <= set_data[COEF_W-1:0];
              4:       coeffs[s].a1 <= set_data[COEF_W-1:0];
              default: coeffs[s].a2 <= set_data[COEF_W-1:0];
            endcase
          end
        end
      end
    end
  end

endmodule
