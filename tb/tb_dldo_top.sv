// tb_dldo_top: end-to-end closed-loop test of the digital LDO.
//
// Two regulators, the baseline (update on the rising edge) and the dual-edge
// variant (update on the falling edge), each drive their own 1 nF load. The
// clock is 50 MHz unless a phase says otherwise. The scenario covers:
//   1. reference step 0 -> 0.7 V at gain 1, 1 mA load: the output must reach
//      0.665 V (5 % of 0.7 V) and then stay regulated within +/-5 %;
//   2. the same step at gain 3, and at gain 1 with a 10 MHz clock. A larger
//      gain and a faster clock must both give a shorter rise time;
//   3. load step 0.9 -> 2.4 mA: more devices turn on and the output is
//      regulated again;
//   4. steady-state limit cycle: the code oscillates around its mean. Its
//      mode (half-period in cycles) is measured for both variants, and the
//      dual-edge variant must show the lower mode;
//   5. gain 0: the code holds;
//   6. saturation: an unreachable reference fills the code, and a 0 V
//      reference empties it;
//   7. both forced-step rows of the select table are exercised (low
//      reference, gain 2).
// Throughout, every update of the baseline code is checked against the
// integrator D(n) = clamp(D(n-1) + K*e(n-1)), using the decision and gain
// held before the edge. It is also checked that the dual-edge code changes
// only at falling edges. Each mechanism is counted, and one that never
// happened counts as a failure.
`timescale 1ns/1ps
module tb_dldo_top;
  import dldo_pkg::*;
  localparam int N = 128;

  logic  clk = 1'b0;
  real   half_period = 10.0;           // 50 MHz
  logic  rst_n = 1'b0;
  logic  gain_wr_en = 1'b0;
  gain_e gain_wr_k = GAIN_1;
  real   vref = 0.0, vin = 1.0, r_load = 700.0;
  logic  discharge = 1'b1;

  real          vout_b, vout_d, iout_b, iout_d;
  logic [N-1:0] code_b, code_d;
  logic         cmp_b, cmp_d;
  gain_e        k_b, k_d;

  int checks = 0, failures = 0;
  int n_ref_step = 0, n_load_step = 0, n_limit_cycle = 0, n_hold = 0;
  int n_sat_full = 0, n_sat_empty = 0, n_row_001 = 0, n_row_011 = 0;
  int n_dual_updates = 0, n_integrator = 0;
  bit integ_on = 1'b0;

  dldo_top #(.DUAL_EDGE(1'b0)) dut_b (
    .clk(clk), .rst_n(rst_n), .gain_wr_en(gain_wr_en), .gain_wr_k(gain_wr_k),
    .vref(vref), .vin(vin), .vout(vout_b), .iout(iout_b), .code(code_b),
    .cmp_out(cmp_b), .gain_k(k_b));
  ldo_load_model load_b (.iin(iout_b), .r_load(r_load), .discharge(discharge), .vout(vout_b));

  dldo_top #(.DUAL_EDGE(1'b1)) dut_d (
    .clk(clk), .rst_n(rst_n), .gain_wr_en(gain_wr_en), .gain_wr_k(gain_wr_k),
    .vref(vref), .vin(vin), .vout(vout_d), .iout(iout_d), .code(code_d),
    .cmp_out(cmp_d), .gain_k(k_d));
  ldo_load_model load_d (.iin(iout_d), .r_load(r_load), .discharge(discharge), .vout(vout_d));

  always #(half_period) clk = ~clk;

  initial begin
    #2.0e6;   // 2 ms of simulated time
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int count_of(logic [N-1:0] w);
    int c = 0;
    for (int i = 0; i < N; i++) c += int'(w[i]);
    return c;
  endfunction

  function automatic bit is_therm(logic [N-1:0] w);
    return count_of(w) == 0 || w == {N{1'b1}} >> (N - count_of(w));
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---- Integrator reference for the baseline, at every rising edge -------
  int   prev_cnt;
  logic prev_d;
  gain_e prev_k;
  always @(posedge clk) begin
    int st, exp_cnt;
    if (integ_on && rst_n) begin
      st = int'(prev_k[1]) * 2 + int'(prev_k[0]);
      if (prev_k != GAIN_0 && ((prev_cnt == 1 && prev_d) || (prev_cnt == 2 && !prev_d))) begin
        st = 1;       // forced-step rows (window 001 up, 011 down)
        if (prev_cnt == 1) n_row_001++;
        else               n_row_011++;
      end
      exp_cnt = prev_d ? prev_cnt + st : prev_cnt - st;
      if (exp_cnt < 0) exp_cnt = 0;
      if (exp_cnt > N) exp_cnt = N;
      #0.1;
      n_integrator++;
      check(is_therm(code_b) && count_of(code_b) == exp_cnt,
            $sformatf("integrator: count %0d, expected %0d (prev %0d d=%b k=%b)",
                      count_of(code_b), exp_cnt, prev_cnt, prev_d, prev_k));
    end
  end
  always @(negedge clk) begin
    prev_cnt = count_of(code_b);
    prev_d   = cmp_b;
    prev_k   = k_b;
  end

  // ---- Dual-edge build: code may change only at falling edges -----------
  logic [N-1:0] last_code_d;
  always @(posedge clk) begin
    last_code_d = code_d;
    #0.1;
    if (rst_n) check(code_d == last_code_d, "dual-edge code changed at a rising edge");
  end
  always @(negedge clk) begin
    last_code_d = code_d;
    #0.1;
    if (rst_n && code_d != last_code_d) n_dual_updates++;
  end

  // ---- Helpers -----------------------------------------------------------
  task automatic write_gain(gain_e g);
    @(negedge clk);
    gain_wr_en = 1'b1; gain_wr_k = g;
    @(negedge clk);
    gain_wr_en = 1'b0;
  endtask

  // Restart from 0 V with all devices off, then step the reference.
  task automatic ref_step(gain_e g, real hp, output real t_rise_b, output real t_rise_d);
    real t0;
    bit done_b, done_d;
    integ_on = 1'b0;
    rst_n = 1'b0; discharge = 1'b1; vref = 0.0;
    half_period = hp;
    #100;
    rst_n = 1'b1; discharge = 1'b0;
    write_gain(g);
    @(negedge clk);
    integ_on = 1'b1;
    vref = 0.7;
    t0 = $realtime;
    done_b = 0; done_d = 0;
    t_rise_b = -1.0; t_rise_d = -1.0;
    while (!(done_b && done_d) && $realtime - t0 < 20000.0) begin
      #0.5;
      if (!done_b && vout_b >= 0.665) begin done_b = 1; t_rise_b = $realtime - t0; end
      if (!done_d && vout_d >= 0.665) begin done_d = 1; t_rise_d = $realtime - t0; end
    end
    check(done_b && done_d, $sformatf("reference step (gain %0d, %0.0f MHz) never reached 0.665 V",
                                      int'(g), 1000.0 / (2.0 * hp)));
    n_ref_step++;
    $display("ref step gain %0d at %0.0f MHz: rise time baseline %0.1f ns, dual-edge %0.1f ns",
             int'(g), 1000.0 / (2.0 * hp), t_rise_b, t_rise_d);
  endtask

  // Watch the steady state for n cycles: output band, code swing and the
  // limit-cycle mode (mean run length of equal comparator decisions).
  task automatic steady(int n, string what, output int swing_b, output int swing_d,
                        output real mode_b, output real mode_d);
    int mn_b = N, mx_b = 0, mn_d = N, mx_d = 0, c;
    int runs_b = 0, runs_d = 0;
    logic last_b, last_d;
    real vmin = 10.0, vmax = -10.0;
    last_b = cmp_b; last_d = cmp_d;
    repeat (n) begin
      @(posedge clk); #1;
      c = count_of(code_b); if (c < mn_b) mn_b = c; if (c > mx_b) mx_b = c;
      c = count_of(code_d); if (c < mn_d) mn_d = c; if (c > mx_d) mx_d = c;
      if (cmp_b != last_b) runs_b++;
      if (cmp_d != last_d) runs_d++;
      last_b = cmp_b; last_d = cmp_d;
      if (vout_b < vmin) vmin = vout_b;
      if (vout_b > vmax) vmax = vout_b;
    end
    swing_b = mx_b - mn_b; swing_d = mx_d - mn_d;
    mode_b = runs_b > 0 ? real'(n) / real'(runs_b) : real'(n);
    mode_d = runs_d > 0 ? real'(n) / real'(runs_d) : real'(n);
    $display("%s: baseline code %0d..%0d mode %0.2f, dual-edge code %0d..%0d mode %0.2f, vout %0.4f..%0.4f V",
             what, mn_b, mx_b, mode_b, mn_d, mx_d, mode_d, vmin, vmax);
    check(vmin > 0.665 && vmax < 0.735, $sformatf("%s: output left the +/-5%% band", what));
    if (runs_b > 0 && swing_b > 0 && swing_b <= 16) n_limit_cycle++;
  endtask

  initial begin
    real tr1_b, tr1_d, tr3_b, tr3_d, tr10_b, tr10_d, mb, md, mb3, md3;
    int sb, sd, c_before, c_after;

    // 1/4: gain 1, 50 MHz, 1 mA load (0.7 V / 700 ohm)
    r_load = 700.0;
    ref_step(GAIN_1, 10.0, tr1_b, tr1_d);
    repeat (300) @(posedge clk);
    steady(200, "gain 1, 1 mA", sb, sd, mb, md);
    check(sb > 0, "no limit cycle at gain 1");
    // Half a cycle less loop delay lowers the limit-cycle mode.
    check(md < mb, $sformatf("dual-edge mode %0.2f not below baseline %0.2f", md, mb));

    // 5: gain 0 holds the code
    write_gain(GAIN_0);
    @(posedge clk); #1;
    c_before = count_of(code_b);
    repeat (20) @(posedge clk);
    #1;
    check(count_of(code_b) == c_before, "gain 0 did not hold the code");
    n_hold++;
    write_gain(GAIN_1);

    // 3: load step 0.9 -> 2.4 mA
    r_load = 0.7 / 0.9e-3;
    repeat (400) @(posedge clk);
    c_before = count_of(code_b);
    r_load = 0.7 / 2.4e-3;
    repeat (600) @(posedge clk);
    c_after = count_of(code_b);
    steady(200, "after load step to 2.4 mA", sb, sd, mb, md);
    check(c_after > c_before + 20, $sformatf("load step: code %0d -> %0d", c_before, c_after));
    n_load_step++;

    // 2: gain 3 and a slower clock, both from rest at the 1 mA load
    r_load = 700.0;
    ref_step(GAIN_3, 10.0, tr3_b, tr3_d);
    repeat (300) @(posedge clk);
    steady(200, "gain 3, 1 mA", sb, sd, mb3, md3);
    check(tr3_b < tr1_b, "gain 3 is not faster than gain 1");
    check(md3 < mb3, $sformatf("gain 3: dual-edge mode %0.2f not below baseline %0.2f", md3, mb3));
    ref_step(GAIN_1, 50.0, tr10_b, tr10_d);
    check(tr10_b > tr1_b, "10 MHz clock is not slower than 50 MHz");
    half_period = 10.0;

    // 6: saturation at both ends
    r_load = 0.7 / 2.4e-3;
    vref = 0.95;
    repeat (300) @(posedge clk);
    #1;
    check(code_b == {N{1'b1}} && code_d == {N{1'b1}}, "code did not fill at an unreachable reference");
    if (code_b == {N{1'b1}}) n_sat_full++;
    vref = 0.0;
    repeat (300) @(posedge clk);
    #1;
    check(code_b == '0 && code_d == '0, "code did not empty at a 0 V reference");
    if (code_b == '0) n_sat_empty++;

    // 7: forced-step rows near the bottom of the code
    write_gain(GAIN_2);
    vref = 0.04;
    repeat (400) @(posedge clk);
    vref = 0.02;
    repeat (400) @(posedge clk);
    integ_on = 1'b0;

    $display("mechanisms: ref_step=%0d load_step=%0d limit_cycle=%0d hold=%0d sat_full=%0d sat_empty=%0d row001=%0d row011=%0d dual_updates=%0d integrator_checks=%0d",
             n_ref_step, n_load_step, n_limit_cycle, n_hold, n_sat_full, n_sat_empty,
             n_row_001, n_row_011, n_dual_updates, n_integrator);
    check(n_ref_step > 0, "no reference step");
    check(n_load_step > 0, "no load step");
    check(n_limit_cycle > 0, "no limit cycle observed");
    check(n_hold > 0, "no gain-0 hold");
    check(n_sat_full > 0, "no full saturation");
    check(n_sat_empty > 0, "no empty saturation");
    check(n_row_001 > 0, "select row 001/up never used");
    check(n_row_011 > 0, "select row 011/down never used");
    check(n_dual_updates > 0, "dual-edge build never updated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
