// cantilever_controller_tb: end-to-end test of the controller at its default
// parameters (two sections, reset ratio N = 128, 64 MHz clock).
//
// One loop runs per clock. It drives the ADC codes, issues queued register
// writes and checks every output against a model built from tb_ref_pkg:
//   - tap_sum must equal the multiplexer sum of the ADC codes from four
//     clocks earlier, under the multiplexer setting of that clock;
//   - tap_filter must equal the two-section reference filter run on tap_sum;
//   - dac_tx must equal the limited DAC code one clock later, with the
//     matching saturation flags;
//   - tap_valid must come every N clocks while N is unchanged.
// Phases: reset defaults; a gain-of-two filter at N = 4 with random
// full-scale inputs through all four multiplexer settings (drives the DAC
// limiter both ways); full rate, N = 1; coefficients changed while samples
// flow; and the frequency sweep the controller was evaluated with: the
// published coefficient set at 500 kHz, a 0.1 V sine on RX at 7700..8300 Hz
// in 100 Hz steps, with gain and phase from tap_filter/tap_sum compared with
// the transfer function of the loaded integer coefficients and with the
// published floating-point transfer function; last, the step latency from RX
// to the DAC at 500 kHz (at most one sample period plus five clocks, the
// published controller measured about 2 us). Each mechanism is counted and
// one that never happened counts as a failure.
module cantilever_controller_tb;
  import cc_pkg::*;
  import tb_ref_pkg::*;

  localparam real FCLK = 64.0e6;
  localparam real PI   = 3.14159265358979;

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

  // Mechanism counters.
  int n_mode[4] = '{0, 0, 0, 0};
  int n_sat_hi = 0, n_sat_lo = 0, n_full_rate = 0, n_decim128 = 0;
  int n_coef_live = 0, n_sweep = 0, n_latency = 0;
  logic signed [11:0] step_val = '0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
  endtask

  initial begin
    #400_000_000;  // 40 million clocks
    fail($sformatf("watchdog expired: taps %0d, queue %0d, N %0d", n_taps, wq.size(), sh_dec));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------------
  // Stimulus and model state shared by the clock loop and the sequencer.
  typedef struct { int addr; longint data; } wr_t;
  wr_t wq[$];

  int     stim_mode = 0;      // 0: zero, 1: random, 2: sine on RX
  real    sine_f = 8000.0, sine_a = 204.8;
  longint cyc = 0;

  int     sh_mux = 0;         // multiplexer setting as the RTL sees it
  longint sh_dec = 128;
  coef_t  sh_c[2];            // coefficients as the RTL sees them
  hist_t  mh[2];
  longint exp_sum[longint];   // expected mux sum by clock index
  longint last_tap = -1;
  longint n_taps = 0;
  longint dec_stable_since = 0;
  bit     dac_pending = 1'b0;
  longint dac_exp = 0;
  bit     exp_hi = 1'b0, exp_lo = 1'b0;

  // Sweep measurement.
  bit     measuring = 1'b0;
  longint meas_n = 0;
  real    sxr = 0, sxi = 0, syr = 0, syi = 0;

  function automatic longint coef_field(coef_t c, int k);
    case (k)
      0: return c.b0; 1: return c.b1; 2: return c.b2;
      3: return c.a0; 4: return c.a1; default: return c.a2;
    endcase
  endfunction

  function automatic coef_t set_field(coef_t c, int k, longint v);
    case (k)
      0: c.b0 = v; 1: c.b1 = v; 2: c.b2 = v;
      3: c.a0 = v; 4: c.a1 = v; default: c.a2 = v;
    endcase
    return c;
  endfunction

  // A coefficient write must not fall between the two sections' use of one
  // sample, so it is issued only in the quiet part of a sample period.
  function automatic bit coef_window();
    longint since;
    since = cyc - last_tap;
    return (last_tap >= 0) && (sh_dec >= 8) && (since >= 1) && (since <= sh_dec - 5);
  endfunction

  always @(negedge clk) begin
    longint y0, y1, s, e;
    real    th;
    wr_t    w;
    int     s_i, k;
    if (!rst) begin
      // 1. DAC code from the sample seen at the previous negedge.
      if (dac_pending) begin
        checks++;
        if (longint'(dac_tx) != dac_exp || dac_sat != {exp_lo, exp_hi})
          fail($sformatf("dac %0d/%b exp %0d/%b%b", dac_tx, dac_sat, dac_exp, exp_lo, exp_hi));
        dac_pending = 1'b0;
      end
      // 2. Taps.
      if (tap_valid) begin
        e = exp_sum.exists(cyc - 4) ? exp_sum[cyc - 4] : 0;
        checks++;
        if (longint'(tap_sum) != e) fail($sformatf("tap_sum %0d exp %0d", tap_sum, e));
        if (last_tap >= 0 && dec_stable_since < last_tap) begin
          checks++;
          if (cyc - last_tap != ((sh_dec <= 1) ? 1 : sh_dec))
            fail($sformatf("tap spacing %0d with N=%0d", cyc - last_tap, sh_dec));
        end
        s  = longint'(tap_sum);
        y0 = biquad_step(sh_c[0], mh[0], s);
        y1 = biquad_step(sh_c[1], mh[1], y0);
        checks++;
        if (longint'(tap_filter) != y1) fail($sformatf("tap_filter %0d exp %0d", tap_filter, y1));
        dac_exp = dac_ref(y1);
        exp_hi  = floor_shift(y1, 6) > 8191;
        exp_lo  = floor_shift(y1, 6) < -8192;
        n_sat_hi += int'(exp_hi);
        n_sat_lo += int'(exp_lo);
        dac_pending = 1'b1;
        if (sh_dec <= 1) n_full_rate++;
        if (sh_dec == 128) n_decim128++;
        if (measuring) begin
          th = 2.0 * PI * sine_f * real'(meas_n) * real'(sh_dec) / FCLK;
          sxr += real'(tap_sum) * $cos(th);    sxi -= real'(tap_sum) * $sin(th);
          syr += real'(tap_filter) * $cos(th); syi -= real'(tap_filter) * $sin(th);
          meas_n++;
        end
        last_tap = cyc;
        n_taps++;
      end
      exp_sum.delete(cyc - 8);
      // 3. New ADC codes for this clock and the sum they should produce.
      case (stim_mode)
        1: begin adc_rx = 12'($urandom); adc_ref = 12'($urandom); end
        2: begin
             adc_rx  = 12'($rtoi($floor(sine_a * $sin(2.0 * PI * sine_f * real'(cyc) / FCLK) + 0.5)));
             adc_ref = 12'($urandom_range(0, 40));
           end
        3: begin adc_rx = step_val; adc_ref = '0; end
        default: begin adc_rx = '0; adc_ref = '0; end
      endcase
      exp_sum[cyc] = mux_ref(sh_mux, longint'(adc_rx), longint'(adc_ref));
      n_mode[sh_mux] += int'(tap_valid);
      // 4. Register writes: the RTL sees a write from the next clock on.
      set_stb = 1'b0;
      if (wq.size() > 0 && (wq[0].addr < 2 || coef_window())) begin
        w = wq.pop_front();
        set_stb = 1'b1; set_addr = 7'(w.addr); set_data = 32'(w.data);
        if (w.addr == 0) sh_mux = int'(w.data & 3);
        else if (w.addr == 1) begin sh_dec = w.data & 16'hffff; dec_stable_since = cyc + 2 * 128; end
        else begin
          s_i = (w.addr - 2) / 6; k = (w.addr - 2) % 6;
          sh_c[s_i] = set_field(sh_c[s_i], k, longint'($signed(24'(w.data))));
        end
      end
    end
    cyc++;
  end

  task automatic write_reg(int addr, longint data);
    wr_t w; w.addr = addr; w.data = data;
    wq.push_back(w);
  endtask

  task automatic load_coeffs(coef_t c0, coef_t c1);
    for (int k = 0; k < 6; k++) write_reg(2 + k, coef_field(c0, k));
    for (int k = 0; k < 6; k++) write_reg(8 + k, coef_field(c1, k));
  endtask

  task automatic wait_queue();
    while (wq.size() > 0) @(posedge clk);
    repeat (4) @(posedge clk);
  endtask

  task automatic wait_taps(int n);
    longint target = n_taps + n;
    while (n_taps < target) @(posedge clk);
  endtask

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Transfer function of the loaded integer coefficients at frequency f.
  task automatic h_int(real f, output real mag, output real ph);
    real w, re = 1.0, im = 0.0, nr, ni, dr, di, qr, qi, t;
    w = 2.0 * PI * f * real'(sh_dec) / FCLK;
    for (int s = 0; s < 2; s++) begin
      nr = real'(sh_c[s].b0) + real'(sh_c[s].b1) * $cos(w) + real'(sh_c[s].b2) * $cos(2.0 * w);
      ni = -real'(sh_c[s].b1) * $sin(w) - real'(sh_c[s].b2) * $sin(2.0 * w);
      dr = real'(sh_c[s].a0) + real'(sh_c[s].a1) * $cos(w) + real'(sh_c[s].a2) * $cos(2.0 * w);
      di = -real'(sh_c[s].a1) * $sin(w) - real'(sh_c[s].a2) * $sin(2.0 * w);
      t  = dr * dr + di * di;
      qr = (nr * dr + ni * di) / t;  qi = (ni * dr - nr * di) / t;
      t  = re * qr - im * qi;  im = re * qi + im * qr;  re = t;
    end
    mag = $sqrt(re * re + im * im);
    ph  = $atan2(im, re) * 180.0 / PI;
  endtask

  // Published floating-point transfer function (four b, four a) at f.
  task automatic h_pub(real f, output real mag);
    real b[4] = '{7.026189e-5, 1.027999e-4, -5.927540e-5, -9.181339e-5};
    real a[4] = '{1.0, -2.848528, 2.708790, -8.588522e-1};
    real w, nr = 0, ni = 0, dr = 0, di = 0;
    w = 2.0 * PI * f / 500.0e3;
    for (int k = 0; k < 4; k++) begin
      nr += b[k] * $cos(k * w); ni -= b[k] * $sin(k * w);
      dr += a[k] * $cos(k * w); di -= a[k] * $sin(k * w);
    end
    mag = $sqrt((nr * nr + ni * ni) / (dr * dr + di * di));
  endtask

  initial begin
    coef_t gain2, unity, sect0, sect1, rnd;
    real hm, hp, mm, mp, pm, ph_meas;
    for (int s = 0; s < 2; s++) begin
      sh_c[s] = '{0, 0, 0, -4194304, 0, 0};
      mh[s]   = '{0, 0, 0, 0};
    end
    repeat (4) @(posedge clk);
    @(negedge clk);
    rst = 1'b0;

    // Reset defaults: N = 128, multiplexer off, output zero.
    stim_mode = 1;
    wait_taps(4);

    // Gain-of-two filter, random full-scale inputs, all four settings.
    gain2 = '{-8388607, 0, 0, -4194304, 0, 0};
    unity = '{-4194304, 0, 0, -4194304, 0, 0};
    load_coeffs(gain2, unity);
    wait_queue();
    write_reg(1, 4);
    for (int m = 0; m < 4; m++) begin
      write_reg(0, (m + 1) % 4);
      wait_queue();
      wait_taps(300);
    end

    // Full rate.
    write_reg(1, 1);
    write_reg(0, 3);
    wait_queue();
    wait_taps(2000);

    // Live coefficient change at N = 128: published set, RX only.
    sect0 = '{35158, 2293, -32865, -4194304, 8339278, -4187298};
    // Section 1 b1 is taken as +49146: with the sign printed in the
    // coefficient table the cascade does not reproduce the published
    // transfer function, with this sign it does to 0.1 %.
    sect1 = '{35158, 49146, 0, -4194304, 3608314, 0};
    write_reg(1, 128);
    wait_queue();
    wait_taps(3);
    rnd = '{longint'($signed(24'($urandom))) >>> 4, 1000, -1000, -4194304, -4000000, 2000000};
    load_coeffs(rnd, unity);
    wait_queue();
    wait_taps(50);
    load_coeffs(sect0, sect1);
    wait_queue();
    n_coef_live++;
    wait_taps(50);

    // Frequency sweep, 0.1 V (204.8 codes) sine on RX.
    write_reg(0, 1);
    wait_queue();
    stim_mode = 2;
    for (int fi = 0; fi < 7; fi++) begin
      sine_f = 7700.0 + 100.0 * fi;
      wait_taps(10000);                // settle: pole radius 0.99917
      sxr = 0; sxi = 0; syr = 0; syi = 0; meas_n = 0;
      measuring = 1'b1;
      wait_taps(5000);
      measuring = 1'b0;
      mm = $sqrt((syr * syr + syi * syi) / (sxr * sxr + sxi * sxi));
      ph_meas = $atan2(syi * sxr - syr * sxi, syr * sxr + syi * sxi) * 180.0 / PI;
      h_int(sine_f, hm, hp);
      h_pub(sine_f, pm);
      $display("f=%0.0f Hz  |H| measured %0.4f, integer coeffs %0.4f, published %0.4f;  phase measured %0.2f, expected %0.2f deg",
               sine_f, mm, hm, pm, ph_meas, hp);
      checks++;
      if (fabs(mm - hm) > 0.01 * hm || fabs(ph_meas - hp) > 1.0)
        fail($sformatf("sweep %0.0f Hz off the integer-coefficient response", sine_f));
      checks++;
      if (fabs(mm - pm) > 0.02 * pm) fail($sformatf("sweep %0.0f Hz off the published response", sine_f));
      n_sweep++;
    end

    // Latency, measured as in the published square-wave test: a step on RX
    // through a unity-gain filter at 500 kHz must reach the DAC within one
    // sample period plus the pipeline (at most 128 + 5 clocks, about 2 us).
    load_coeffs(unity, unity);
    wait_queue();
    stim_mode = 3;
    for (int i = 0; i < 20; i++) begin
      int lat, lat_max;
      step_val = (i % 2 == 0) ? 12'sd1000 : 12'sd0;
      wait_taps(3);
      repeat ($urandom_range(0, 127)) @(negedge clk);
      step_val = (i % 2 == 0) ? 12'sd0 : 12'sd1000;
      lat = 0;
      while (longint'(dac_tx) != ((i % 2 == 0) ? 0 : 4000) && lat < 1000) begin
        @(negedge clk); lat++;
      end
      checks++;
      if (lat < 4 || lat > 128 + 5) fail($sformatf("step latency %0d clocks", lat));
      else n_latency++;
    end

    $display("mechanisms: mux none %0d, RX %0d, Ref %0d, sum %0d; DAC limited high %0d, low %0d;",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_sat_hi, n_sat_lo);
    $display("            full-rate samples %0d, 500 kHz samples %0d, live coefficient loads %0d, sweep points %0d, latency steps %0d",
             n_full_rate, n_decim128, n_coef_live, n_sweep, n_latency);
    foreach (n_mode[m]) begin checks++; if (n_mode[m] == 0) fail($sformatf("mux mode %0d never used", m)); end
    checks++; if (n_sat_hi == 0) fail("DAC never limited high");
    checks++; if (n_sat_lo == 0) fail("DAC never limited low");
    checks++; if (n_full_rate == 0) fail("full rate never run");
    checks++; if (n_decim128 == 0) fail("N = 128 never run");
    checks++; if (n_coef_live == 0) fail("no live coefficient change");
    checks++; if (n_sweep != 7) fail("sweep incomplete");
    checks++; if (n_latency != 20) fail("latency steps incomplete");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
