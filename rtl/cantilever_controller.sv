// cantilever_controller: FPGA signal path of a digital force-microscope
// cantilever controller.
//
// The cantilever position (RX) and a reference signal (Ref) arrive as 12-bit
// ADC codes at 64 MHz. The input multiplexer passes RX, Ref, neither or their
// sum; the decimator divides the rate by the host-set N (128 gives 500 kHz);
// a cascade of NUM_SECTIONS second-order IIR sections (two in the published
// controller) forms the control law; the limiter turns the result into a
// 14-bit DAC code that cannot wrap. The order of these stages and the two
// acquisition points, 'sum' (after the divider) and 'filter' (after the last
// section), follow the published signal path. The host register file is
// written through a strobe/address/data port that the USB interface drives;
// that interface, the sample streams back to the host and the codec itself
// are outside this module.
//
// Timing at the default settings: an ADC sample reaches the divider one
// clock later; a selected sample enters the first section on the decimator
// strobe and leaves the limiter NUM_SECTIONS+1 clocks after that. The taps
// are valid on tap_valid, once per filter sample, and belong to the same
// sample: tap_sum is delayed to line up with tap_filter. All registers reset
// synchronously on rst.
module cantilever_controller
  import cc_pkg::*;
#(
  parameter int NUM_SECTIONS = 2
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [ADC_W-1:0]  adc_rx,
  input  logic signed [ADC_W-1:0]  adc_ref,
  input  logic                     set_stb,
  input  logic [REG_ADDR_W-1:0]    set_addr,
  input  logic [31:0]              set_data,
  output logic signed [DAC_W-1:0]  dac_tx,
  output logic                     tap_valid,
  output logic signed [DATA_W-1:0] tap_sum,
  output logic signed [DATA_W-1:0] tap_filter,
  output logic [1:0]               dac_sat
);

  mux_sel_t                           mux_sel;
  logic [DECIM_W-1:0]                 decim_n;
  biquad_coeffs_t [NUM_SECTIONS-1:0]  coeffs;

  logic signed [DATA_W-1:0] mux_out, dec_out;
  logic                     dec_valid;

  // Stage k of the cascade reads sect_data[k] and writes sect_data[k+1].
  logic signed [DATA_W-1:0] sect_data  [NUM_SECTIONS+1];
  logic                     sect_valid [NUM_SECTIONS+1];

  // Delay line that lines the 'sum' tap up with the filter output.
  logic signed [DATA_W-1:0] sum_dly [NUM_SECTIONS+1];

  control_regs #(.NUM_SECTIONS(NUM_SECTIONS)) u_regs (
    .clk, .rst, .set_stb, .set_addr, .set_data,
    .mux_sel, .decim_n, .coeffs
  );

  input_mux u_mux (
    .clk, .rst, .adc_rx, .adc_ref, .mux_sel, .sum_out(mux_out)
  );

  decimator u_decim (
    .clk, .rst, .decim_n, .in_data(mux_out),
    .out_valid(dec_valid), .out_data(dec_out)
  );

  always_comb begin
    sect_data[0]  = dec_out;
    sect_valid[0] = dec_valid;
    sum_dly[0]    = dec_out;
  end

  for (genvar k = 0; k < NUM_SECTIONS; k++) begin : g_sect
    biquad u_biquad (
      .clk, .rst,
      .coeffs   (coeffs[k]),
      .in_valid (sect_valid[k]),
      .in_data  (sect_data[k]),
      .out_valid(sect_valid[k+1]),
      .out_data (sect_data[k+1])
    );

    always_ff @(posedge clk) begin
      if (rst) sum_dly[k+1] <= '0;
      else     sum_dly[k+1] <= sum_dly[k];
    end
  end

  assign tap_valid  = sect_valid[NUM_SECTIONS];
  assign tap_filter = sect_data[NUM_SECTIONS];
  assign tap_sum    = sum_dly[NUM_SECTIONS];

  logic sat_hi, sat_lo;

  dac_limiter u_dac (
    .clk, .rst,
    .in_valid(sect_valid[NUM_SECTIONS]),
    .in_data (sect_data[NUM_SECTIONS]),
    .dac_out (dac_tx),
    .sat_hi, .sat_lo
  );

  assign dac_sat = {sat_lo, sat_hi};

endmodule
