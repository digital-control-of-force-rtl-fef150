// dac_limiter_tb: checks the scaling and limiting in front of the DAC.
//
// Random 24-bit words, words just inside and just outside the DAC range, and
// the two extreme words are applied with random gaps. Each DAC code must be
// the input shifted right by 6 and limited to [-8192, 8191], one clock after
// the strobe, with the matching saturation pulse; between strobes the code
// must hold (zero-order hold).
module dac_limiter_tb;
  import cc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic in_valid = 1'b0;
  logic signed [23:0] in_data = '0;
  logic signed [13:0] dac_out;
  logic sat_hi, sat_lo;
  int checks = 0, failures = 0;
  int n_hi = 0, n_lo = 0;

  dac_limiter dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint x, e, held;
    bit ehi, elo;
    repeat (3) @(posedge clk); #1;
    checks++;
    if (dac_out != '0) failures++;
    @(negedge clk); rst = 1'b0;
    for (int i = 0; i < 5000; i++) begin
      case (i % 8)
        0: x = 8191 * 64 + 63;
        1: x = 8192 * 64;
        2: x = -8192 * 64;
        3: x = -8192 * 64 - 1;
        4: x = 8388607;
        5: x = -8388608;
        default: x = longint'($signed(24'($urandom))) >>> $urandom_range(0, 6);
      endcase
      e = dac_ref(x);
      ehi = (floor_shift(x, 6) > 8191);
      elo = (floor_shift(x, 6) < -8192);
      in_data = 24'(x); in_valid = 1'b1;
      @(negedge clk); in_valid = 1'b0;
      checks++;
      if (longint'(dac_out) != e || sat_hi != ehi || sat_lo != elo) begin
        failures++;
        if (failures < 10) $display("x=%0d got %0d/%0b%0b exp %0d/%0b%0b",
                                    x, dac_out, sat_hi, sat_lo, e, ehi, elo);
      end
      n_hi += int'(ehi); n_lo += int'(elo);
      held = e;
      repeat ($urandom_range(0, 3)) begin
        in_data = 24'($urandom);
        @(negedge clk);
        checks++;
        if (longint'(dac_out) != held || sat_hi || sat_lo) failures++;
      end
    end
    checks++;
    if (n_hi == 0 || n_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
