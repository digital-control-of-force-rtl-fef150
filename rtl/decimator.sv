// decimator: the divide-by-N stage that sets the filter sampling rate.
//
// A down-counter runs on the 64 MHz clock. When it reaches zero the decimator
// takes the current input sample, raises out_valid for one clock and reloads
// the counter with N-1. So the filters see one sample every N clocks:
// N = 128 gives the 500 kHz rate used for 8 kHz cantilevers, N = 1 (or 0)
// gives the full 64 MHz rate. A divider that the host can set, and N = 128,
// follow the published controller. Keeping every Nth sample without averaging
// is our own choice, the simplest circuit that divides the rate.
//
// Interface: decim_n comes from the register file. A new value is loaded when
// the running count next reaches zero. out_data holds the last sample between
// strobes. Timing: out_valid and out_data change one clock after the counter
// reaches zero. Reset starts the first strobe N clocks later.
module decimator
  import cc_pkg::*;
#(
  parameter int DATA_BITS  = DATA_W,
  parameter int DECIM_BITS = DECIM_W
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic        [DECIM_BITS-1:0] decim_n,
  input  logic signed [DATA_BITS-1:0]  in_data,
  output logic                         out_valid,
  output logic signed [DATA_BITS-1:0]  out_data
);

  logic [DECIM_BITS-1:0] count;
  logic [DECIM_BITS-1:0] reload;

  always_comb reload = (decim_n == '0) ? '0 : decim_n - 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      count     <= reload;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (count == '0) begin
      count     <= reload;
      out_valid <= 1'b1;
      out_data  <= in_data;
    end else begin
      count     <= count - 1'b1;
      out_valid <= 1'b0;
    end
  end

  // With N >= 2 two strobes are never adjacent.
  assert property (@(posedge clk) disable iff (rst)
                   (out_valid && decim_n > 1 && $stable(decim_n)) |=> !out_valid);

endmodule
