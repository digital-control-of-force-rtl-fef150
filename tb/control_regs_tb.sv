// control_regs_tb: checks the host register file.
//
// After reset the defaults must read back (multiplexer off, N = 128, b = 0,
// a0 = -2**22, a1 = a2 = 0). Then random writes to every mapped address and to
// unmapped addresses are issued; after each write the outputs must equal a
// shadow copy kept by the testbench, so each write lands in exactly its own
// field and unmapped writes change nothing.
module control_regs_tb;
  import cc_pkg::*;

  localparam int NS = 2;

  logic clk = 1'b0, rst = 1'b1;
  logic set_stb = 1'b0;
  logic [6:0] set_addr = '0;
  logic [31:0] set_data = '0;
  mux_sel_t mux_sel;
  logic [15:0] decim_n;
  biquad_coeffs_t [NS-1:0] coeffs;
  int checks = 0, failures = 0;

  logic [23:0] shadow [NS][6];
  logic [1:0]  sh_mux;
  logic [15:0] sh_dec;

  control_regs #(.NUM_SECTIONS(NS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    logic [23:0] got [6];
    checks++;
    if (mux_sel != mux_sel_t'(sh_mux) || decim_n != sh_dec) begin
      failures++;
      if (failures < 10) $display("%s: mux %0d/%0d decim %0d/%0d", what, mux_sel, sh_mux, decim_n, sh_dec);
    end
    for (int s = 0; s < NS; s++) begin
      got = '{coeffs[s].b0, coeffs[s].b1, coeffs[s].b2, coeffs[s].a0, coeffs[s].a1, coeffs[s].a2};
      for (int k = 0; k < 6; k++) begin
        checks++;
        if (got[k] != shadow[s][k]) begin
          failures++;
          if (failures < 10) $display("%s: sect %0d coef %0d got %0d exp %0d", what, s, k, got[k], shadow[s][k]);
        end
      end
    end
  endtask

  initial begin
    int a;
    sh_mux = 2'd0; sh_dec = 16'd128;
    for (int s = 0; s < NS; s++) shadow[s] = '{0, 0, 0, 24'hc00000, 0, 0};
    repeat (3) @(posedge clk);
    @(negedge clk);
    compare("reset");
    rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      a = (i % 5 == 4) ? $urandom_range(14, 127) : $urandom_range(0, 13);
      set_addr = 7'(a); set_data = $urandom; set_stb = 1'b1;
      if (a == 0) sh_mux = set_data[1:0];
      else if (a == 1) sh_dec = set_data[15:0];
      else if (a < 2 + 6 * NS) shadow[(a - 2) / 6][(a - 2) % 6] = set_data[23:0];
      @(negedge clk);
      set_stb = 1'b0;
      compare("write");
      // A cycle with the strobe low and junk on the bus changes nothing.
      set_addr = 7'($urandom); set_data = $urandom;
      @(negedge clk);
      compare("idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
