// decimator_tb: checks the divide-by-N stage.
//
// The input is a counter that changes every clock, so each output sample
// shows exactly which clock it was taken on. For N = 1, 2, 5, 128 (the
// 500 kHz setting) and 0, the strobe must come every N clocks (every clock
// for 0 and 1), each sample must be the input present at the edge that
// raised the strobe, and out_data must hold between strobes.
module decimator_tb;
  import cc_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic [15:0] decim_n = 16'd128;
  logic signed [23:0] in_data = '0;
  logic out_valid;
  logic signed [23:0] out_data;
  int checks = 0, failures = 0;
  int cycle = 0;

  decimator dut (.*);

  always #5 clk = ~clk;

  // in_data counts clock edges: between edge k and edge k+1 it equals k.
  always @(posedge clk) begin
    cycle   <= cycle + 1;
    in_data <= 24'(cycle + 1);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_n(int n, int strobes);
    int last = -1, got = 0, eff;
    logic signed [23:0] held = '0;
    eff = (n <= 1) ? 1 : n;
    @(negedge clk);
    rst = 1'b1; decim_n = 16'(n);
    @(negedge clk);
    rst = 1'b0;
    while (got < strobes) begin
      @(posedge clk); #1;
      if (out_valid) begin
        checks++;
        if (out_data != 24'(cycle - 1)) begin
          failures++;
          if (failures < 10) $display("N=%0d data %0d at cycle %0d", n, out_data, cycle);
        end
        if (last >= 0) begin
          checks++;
          if (cycle - last != eff) begin
            failures++;
            if (failures < 10) $display("N=%0d spacing %0d", n, cycle - last);
          end
        end
        last = cycle; held = out_data; got++;
      end else if (last >= 0) begin
        checks++;
        if (out_data != held) failures++;
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    run_n(1, 50);
    run_n(2, 50);
    run_n(5, 50);
    run_n(128, 20);
    run_n(0, 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
