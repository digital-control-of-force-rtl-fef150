// biquad_tb: checks one second-order section against the reference model.
//
// Four coefficient sets are run: section 0 of the published controller
// (a0 = -2**22), the same with a0 = +2**22, a pure gain that drives the
// output into saturation, and fully random 24-bit coefficients that also
// wrap the 50-bit accumulator. Inputs are random signal words, fed with
// random gaps between strobes. Every output must match tb_ref_pkg exactly and
// appear one clock after its input strobe; between strobes the state must not
// move (checked by the following outputs).
module biquad_tb;
  import cc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  biquad_coeffs_t coeffs = '0;
  logic in_valid = 1'b0;
  logic signed [23:0] in_data = '0;
  logic out_valid;
  logic signed [23:0] out_data;
  int checks = 0, failures = 0;
  int saturated = 0;

  biquad dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(coef_t c);
    coeffs.b0 = 24'(c.b0); coeffs.b1 = 24'(c.b1); coeffs.b2 = 24'(c.b2);
    coeffs.a0 = 24'(c.a0); coeffs.a1 = 24'(c.a1); coeffs.a2 = 24'(c.a2);
  endtask

  task automatic run_set(coef_t c, int samples, int amp_bits);
    hist_t h = '{0, 0, 0, 0};
    longint x, y;
    @(negedge clk); rst = 1'b1; in_valid = 1'b0;
    load(c);
    @(negedge clk); rst = 1'b0;
    for (int i = 0; i < samples; i++) begin
      repeat ($urandom_range(0, 2)) @(negedge clk);
      x = longint'($signed(24'($urandom))) >>> (24 - amp_bits);
      in_data  = 24'(x);
      in_valid = 1'b1;
      y = biquad_step(c, h, x);
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || longint'(out_data) != y) begin
        failures++;
        if (failures < 10) $display("sample %0d: valid=%0b got %0d exp %0d",
                                    i, out_valid, out_data, y);
      end
      if (y == 8388607 || y == -8388608) saturated++;
      @(negedge clk);
      checks++;
      if (out_valid) failures++;  // exactly one output strobe per input
    end
  endtask

  initial begin
    coef_t c;
    repeat (3) @(posedge clk);
    // Section 0 of the published coefficient table.
    c = '{35158, 2293, -32865, -4194304, 8339278, -4187298};
    run_set(c, 3000, 20);
    c.a0 = 4194304;
    run_set(c, 1000, 20);
    // Gain of about 2 on full-scale input: saturates both ways.
    c = '{-8388607, 0, 0, -4194304, 0, 0};
    run_set(c, 1000, 24);
    // Random coefficients.
    for (int k = 0; k < 4; k++) begin
      c.b0 = longint'($signed(24'($urandom))); c.b1 = longint'($signed(24'($urandom)));
      c.b2 = longint'($signed(24'($urandom)));
      c.a0 = (k % 2 == 0) ? -4194304 : 4194304;
      c.a1 = longint'($signed(24'($urandom))); c.a2 = longint'($signed(24'($urandom)));
      run_set(c, 500, 24);
    end
    checks++;
    if (saturated == 0) begin failures++; $display("saturation never exercised"); end
    $display("saturated outputs: %0d", saturated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
