// tb_dldo_full: one complete regulation run of the digital LDO at its
// default build (128 devices, baseline clocking, no parameter overrides).
//
// 50 MHz clock, 1 V supply, 1 nF load capacitance. The output starts at
// 0 V with all devices off, and the reference steps to 0.7 V at a
// 0.9 mA load (gain 1). Once regulated, the load steps to 2.4 mA. Checked:
//   - the output reaches 0.665 V, and the rise time is at least the
//     slew bound (one device per cycle);
//   - in steady state, before and after the load step, the output stays
//     within +/-5 % of 0.7 V, and the code oscillates (a limit cycle);
//   - the code grows with the load, and it stays below the full array
//     (2.4 mA fits in the 3.5 mA array);
//   - every rising-edge update moves the code by exactly the programmed gain,
//     in the direction of the previous comparator decision.
`timescale 1ns/1ps
module tb_dldo_full;
  import dldo_pkg::*;
  localparam int N = N_PMOS;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  gain_wr_en = 1'b0;
  gain_e gain_wr_k = GAIN_1;
  real   vref = 0.0, vin = 1.0, r_load = 0.7 / 0.9e-3;
  logic  discharge = 1'b1;
  real   vout, iout;
  logic [N-1:0] code;
  logic  cmp;
  gain_e k;
  int checks = 0, failures = 0;

  dldo_top dut (
    .clk(clk), .rst_n(rst_n), .gain_wr_en(gain_wr_en), .gain_wr_k(gain_wr_k),
    .vref(vref), .vin(vin), .vout(vout), .iout(iout), .code(code),
    .cmp_out(cmp), .gain_k(k));
  ldo_load_model load (.iin(iout), .r_load(r_load), .discharge(discharge), .vout(vout));

  always #10 clk = ~clk;

  initial begin
    #1.0e6;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int count_of(logic [N-1:0] w);
    int c = 0;
    for (int i = 0; i < N; i++) c += int'(w[i]);
    return c;
  endfunction

  // Integrator check at gain 1, away from the ends of the code.
  int prev_cnt; logic prev_d; bit on = 1'b0;
  always @(negedge clk) begin prev_cnt = count_of(code); prev_d = cmp; end
  always @(posedge clk) begin
    if (on && prev_cnt > 2 && prev_cnt < N) begin
      #0.1;
      check(count_of(code) == prev_cnt + (prev_d ? 1 : -1),
            $sformatf("update %0d -> %0d with d=%b", prev_cnt, count_of(code), prev_d));
    end
  end

  task automatic steady(int n, string what, output int mean_cnt);
    real vmin = 10.0, vmax = -10.0;
    int mn = N, mx = 0, sum = 0, c;
    repeat (n) begin
      @(posedge clk); #1;
      c = count_of(code); sum += c;
      if (c < mn) mn = c; if (c > mx) mx = c;
      if (vout < vmin) vmin = vout; if (vout > vmax) vmax = vout;
    end
    mean_cnt = sum / n;
    $display("%s: code %0d..%0d, vout %0.4f..%0.4f V", what, mn, mx, vmin, vmax);
    check(vmin > 0.665 && vmax < 0.735, {what, ": output left the band"});
    check(mx > mn, {what, ": no limit cycle"});
    check(mx < N, {what, ": array saturated"});
  endtask

  initial begin
    real t0, trise;
    int c_light, c_heavy;
    #55;
    rst_n = 1'b1; discharge = 1'b0;
    @(negedge clk);
    on = 1'b1;
    vref = 0.7; t0 = $realtime; trise = -1.0;
    while (trise < 0.0 && $realtime - t0 < 20000.0) begin
      #0.5;
      if (vout >= 0.665) trise = $realtime - t0;
    end
    $display("rise time to 0.665 V: %0.1f ns", trise);
    check(trise > 0.0, "output never reached 0.665 V");
    // At least (devices needed at 0.665 V) cycles of 20 ns: 0.665/778 A over
    // 0.335 V per device conductance.
    check(trise >= 20.0 * ((0.665 / (0.7 / 0.9e-3)) / (3.5e-3 / 128.0 / 0.3 * 0.335) - 1.0),
          "rise faster than one device per cycle allows");
    repeat (400) @(posedge clk);
    steady(300, "0.9 mA", c_light);
    r_load = 0.7 / 2.4e-3;
    repeat (600) @(posedge clk);
    steady(300, "2.4 mA", c_heavy);
    check(c_heavy > c_light, "code did not grow with the load");
    $display("mean devices on: %0d at 0.9 mA, %0d at 2.4 mA", c_light, c_heavy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
