// cantilever_loop_tb: closed-loop test of the controller with a simulated
// cantilever, for target controlled quality factors 75, 100, 200, 300, 400.
//
// The cantilever is a behavioural model of a single-mode resonator
// (8347 Hz, Q = 10,000), integrated every clock. Its deflection, in volts at
// the ADC, drives RX. The DAC code, in volts times the coupling KOUT, is the
// force on it. For each target Q_cl the testbench derives the optimal
// controller H(s) = K (s + z) / (s^2 + (w/Qoc) s + w^2) with the closed-form
// design rules (alpha = 1/Q_cl - 1/Q, beta = 4 alpha), turns it into a
// z-domain biquad with the prewarped bilinear transform at 500 kHz, scales
// it to 24-bit integers with a0 = -2**22, and loads it into section 0.
// Section 1 holds a first-order phase-lead stage of 6 degrees centred on the
// controller frequency, compensating the lag of sampling and the zero-order
// hold. Gain is moved from section 1 to section 0 (SPLIT) so that section 0's
// small b coefficients keep enough bits. The sign is chosen so the force
// opposes the motion. The cantilever starts deflected by 0.4 V and rings
// down. The controlled Q is taken from the decay of the per-period peak
// amplitude between 1.5 and 2.5 decay times, Q = pi f t / ln(A1/A2), once
// the faster estimator pole pair has died out. It must lie within 5 % of
// the target. A last run with the loop open checks that the uncontrolled
// Q of about 10,000 is seen.
module cantilever_loop_tb;
  import cc_pkg::*;

  localparam real PI    = 3.14159265358979;
  localparam real FCLK  = 64.0e6;
  localparam real FS    = 500.0e3;
  localparam real FN    = 8347.0;
  localparam real QN    = 10000.0;
  localparam real KOUT  = 0.01;      // force per DAC volt, normalised
  localparam real PHI_M = 6.0;       // phase lead, degrees
  localparam real SPLIT = 32.0;      // gain moved from section 1 to section 0

  logic clk = 1'b0, rst = 1'b1;
  logic signed [11:0] adc_rx = '0, adc_ref = '0;
  logic set_stb = 1'b0;
  logic [6:0] set_addr = '0;
  logic [31:0] set_data = '0;
  logic signed [13:0] dac_tx;
  logic tap_valid;
  logic signed [23:0] tap_sum, tap_filter;
  logic [1:0] dac_sat;

  cantilever_controller dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #300_000_000;  // 30 million clocks
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Cantilever state, in volts at the ADC.
  real x = 0.0, v = 0.0;
  bit  loop_on = 1'b0;
  real wn = 2.0 * PI * FN;
  real peak = 0.0;
  int  dac_peak = 0;

  always @(negedge clk) begin
    real u, dt, acc;
    dt = 1.0 / FCLK;
    u  = loop_on ? KOUT * real'(dac_tx) / 8192.0 : 0.0;
    acc = wn * wn * (u - x) - (wn / QN) * v;
    v = v + acc * dt;
    x = x + v * dt;
    adc_rx = 12'($rtoi($floor(x * 2048.0 + 0.5)));
    if ((x < 0 ? -x : x) > peak) peak = (x < 0 ? -x : x);
    if ((dac_tx < 0 ? -int'(dac_tx) : int'(dac_tx)) > dac_peak) dac_peak = (dac_tx < 0 ? -int'(dac_tx) : int'(dac_tx));
  end

  task automatic write_reg(int addr, longint data);
    @(negedge clk);
    set_stb = 1'b1; set_addr = 7'(addr); set_data = 32'(data);
    @(negedge clk);
    set_stb = 1'b0;
  endtask

  function automatic longint to_int(real c);
    return longint'($rtoi(c * 4194304.0 + (c < 0 ? -0.5 : 0.5)));
  endfunction

  // Design the controller for target q_cl and load it.
  task automatic load_controller(real q_cl);
    real al, be, s, koc, zoc, woc, qoc, T, c, p, q, n0, n1, d0, d1, d2, g;
    real eta, tau_l, cl, lb0, lb1, la1, sphi;
    T   = 1.0 / FS;
    al  = 1.0 / q_cl - 1.0 / QN;
    be  = 4.0 * al;
    s   = al + be;
    koc = wn * (0.5 * al * be * s + al * be / QN);
    zoc = wn * (al * be / 2.0 - 2.0 + s / QN + 2.0 / (QN * QN)) / (s + 2.0 / QN);
    woc = wn * $sqrt(s * s / 2.0 + s / QN + 1.0);
    qoc = $sqrt(s * s / 2.0 + s / QN + 1.0) / (s + 1.0 / QN);
    c   = woc / $tan(woc * T / 2.0);
    p   = woc / qoc;
    q   = woc * woc;
    n0 = c + zoc; n1 = zoc - c;
    d0 = c * c + p * c + q; d1 = 2.0 * (q - c * c); d2 = c * c - p * c + q;
    // Digital gain: H / KOUT, with the force opposing the motion (-H).
    g = -koc / KOUT / d0 * SPLIT;
    // a0 = -2^22: write b = -b', a = -a' (see the register map).
    write_reg(2, -to_int(g * n0));
    write_reg(3, -to_int(g * (n0 + n1)));
    write_reg(4, -to_int(g * n1));
    write_reg(5, -4194304);
    write_reg(6, -to_int(d1 / d0));
    write_reg(7, -to_int(d2 / d0));
    // Section 1: phase lead (1 + eta tau s) / (sqrt(eta) (1 + tau s)),
    // centred on w_oc, by the same prewarped transform, divided by SPLIT.
    sphi  = $sin(PHI_M * PI / 180.0);
    eta   = (1.0 + sphi) / (1.0 - sphi);
    tau_l = 1.0 / (woc * $sqrt(eta));
    cl    = woc / $tan(woc * T / 2.0);
    lb0   = (1.0 + eta * tau_l * cl) / ($sqrt(eta) * (1.0 + tau_l * cl)) / SPLIT;
    lb1   = (1.0 - eta * tau_l * cl) / ($sqrt(eta) * (1.0 + tau_l * cl)) / SPLIT;
    la1   = (1.0 - tau_l * cl) / (1.0 + tau_l * cl);
    write_reg(8, -to_int(lb0)); write_reg(9, -to_int(lb1)); write_reg(10, 0);
    write_reg(11, -4194304); write_reg(12, -to_int(la1)); write_reg(13, 0);
    $display("Q_cl %0.0f: section 0 b = %0d %0d %0d, a1 %0d a2 %0d; section 1 b = %0d %0d, a1 %0d", q_cl,
             -to_int(g * n0), -to_int(g * (n0 + n1)), -to_int(g * n1),
             -to_int(d1 / d0), -to_int(d2 / d0), -to_int(lb0), -to_int(lb1), -to_int(la1));
  endtask

  initial begin
    real targets[5] = '{75.0, 100.0, 200.0, 300.0, 400.0};
    real tau, a1, a2, q_meas;
    int  period, w_skip, w_meas;
    period = $rtoi(FCLK / FN);
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    write_reg(0, 1);        // RX only
    foreach (targets[i]) begin
      load_controller(targets[i]);
      loop_on = 1'b0; x = 0.4; v = 0.0;
      loop_on = 1'b1;
      tau    = 2.0 * targets[i] / wn;              // amplitude decay time
      w_skip = $rtoi(1.5 * tau * FN);              // periods to skip
      w_meas = $rtoi(1.0 * tau * FN);              // periods to measure over
      repeat (w_skip * period) @(negedge clk);
      peak = 0.0; repeat (period) @(negedge clk); a1 = peak;
      repeat ((w_meas - 1) * period) @(negedge clk);
      peak = 0.0; repeat (period) @(negedge clk); a2 = peak;
      q_meas = PI * FN * (real'(w_meas) / FN) / $ln(a1 / a2);
      $display("target Q_cl %0.0f: measured %0.1f (peaks %0.4f V -> %0.4f V, largest DAC code %0d)",
               targets[i], q_meas, a1, a2, dac_peak);
      dac_peak = 0;
      checks++;
      if (!(q_meas > 0.95 * targets[i] && q_meas < 1.05 * targets[i])) begin
        failures++;
        $display("FAIL: controlled Q out of range");
      end
      loop_on = 1'b0;
    end
    // Uncontrolled, for contrast: the ring-down must be far slower.
    x = 0.4; v = 0.0;
    repeat (20 * period) @(negedge clk);
    peak = 0.0; repeat (period) @(negedge clk); a1 = peak;
    repeat (200 * period) @(negedge clk);
    peak = 0.0; repeat (period) @(negedge clk); a2 = peak;
    q_meas = PI * 200.0 / $ln(a1 / a2);
    $display("loop open: Q %0.0f", q_meas);
    checks++;
    if (q_meas < 5000.0) begin failures++; $display("FAIL: open-loop Q too low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
