// input_mux_tb: checks the input multiplexer and adder.
//
// Random 12-bit codes, including the extreme codes, are applied on RX and Ref
// under each of the four multiplexer settings. One clock later the output
// must equal the selected codes scaled by 2**8 and added, as predicted by
// tb_ref_pkg. The output right after reset is checked to be zero.
module input_mux_tb;
  import cc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic signed [11:0] adc_rx = '0, adc_ref = '0;
  mux_sel_t mux_sel = MUX_NONE;
  logic signed [23:0] sum_out;
  int checks = 0, failures = 0;
  int seen[4] = '{0, 0, 0, 0};

  input_mux dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_v;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (sum_out != '0) begin failures++; $display("reset value %0d", sum_out); end
    rst = 1'b0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      case (i % 7)
        0:       begin adc_rx = 12'sh7ff; adc_ref = 12'sh7ff; end
        1:       begin adc_rx = 12'sh800; adc_ref = 12'sh800; end
        default: begin adc_rx = 12'($urandom); adc_ref = 12'($urandom); end
      endcase
      mux_sel = mux_sel_t'((i / 3) % 4);
      exp_v = mux_ref(int'(mux_sel), longint'(adc_rx), longint'(adc_ref));
      @(posedge clk); #1;
      checks++;
      seen[int'(mux_sel)]++;
      if (longint'(sum_out) != exp_v) begin
        failures++;
        if (failures < 10) $display("sel=%0d rx=%0d ref=%0d got %0d exp %0d",
                                    mux_sel, adc_rx, adc_ref, sum_out, exp_v);
      end
    end
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (seen[s] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
