// tb_dldo_sweep: sweep of the sampling-to-load-pole ratio Fs/Fl for the
// baseline and the dual-edge regulator, as in the paper's mode and rise-time
// studies.
//
// Operating point: 1 mA at 0.7 V from 1 V, into 1 nF, gain 1. The load pole
// is Fl = 1 / ((R_L || R_PMOS) * C_L), with R_L = 700 ohm and
// R_PMOS = 0.3 V / 1 mA = 300 ohm, so Fl = 4.76e6 1/s. For each ratio in
// {2, 4, 6, 8, 10, 14, 17}, the clock period is 1 / (ratio * Fl). Both loops
// start from 0 V with all devices off. The rise time to 0.665 V is measured,
// and then the steady-state mode: cycles per run of equal comparator
// decisions. Checked against the paper's trends:
//   - rise time falls as Fs/Fl grows (more than 3x from ratio 2 to 17);
//   - the mode grows with Fs/Fl (mode at 17 above mode at 2);
//   - the dual-edge loop's largest mode is below the baseline's;
//   - VOUT stays within +/-5 % of 0.7 V in steady state.
`timescale 1ns/1ps
module tb_dldo_sweep;
  import dldo_pkg::*;
  localparam int N = N_PMOS;
  localparam int NR = 7;
  localparam real FL = 1.0 / ((700.0 * 300.0 / 1000.0) * 1.0e-9);  // 1/s
  localparam int RATIO [NR] = '{2, 4, 6, 8, 10, 14, 17};

  logic  clk = 1'b0;
  real   half_period = 10.0;
  logic  rst_n = 1'b0;
  real   vref = 0.0, vin = 1.0, r_load = 700.0;
  logic  discharge = 1'b1;
  real   vout_b, vout_d, iout_b, iout_d;
  logic [N-1:0] code_b, code_d;
  logic  cmp_b, cmp_d;
  gain_e k_b, k_d;
  int checks = 0, failures = 0;

  dldo_top #(.DUAL_EDGE(1'b0)) dut_b (
    .clk(clk), .rst_n(rst_n), .gain_wr_en(1'b0), .gain_wr_k(GAIN_1),
    .vref(vref), .vin(vin), .vout(vout_b), .iout(iout_b), .code(code_b),
    .cmp_out(cmp_b), .gain_k(k_b));
  ldo_load_model load_b (.iin(iout_b), .r_load(r_load), .discharge(discharge), .vout(vout_b));
  dldo_top #(.DUAL_EDGE(1'b1)) dut_d (
    .clk(clk), .rst_n(rst_n), .gain_wr_en(1'b0), .gain_wr_k(GAIN_1),
    .vref(vref), .vin(vin), .vout(vout_d), .iout(iout_d), .code(code_d),
    .cmp_out(cmp_d), .gain_k(k_d));
  ldo_load_model load_d (.iin(iout_d), .r_load(r_load), .discharge(discharge), .vout(vout_d));

  always #(half_period) clk = ~clk;

  initial begin
    #5.0e6;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    real tr_b [NR], tr_d [NR], mode_b [NR], mode_d [NR];
    real t0, vmin, vmax, maxm_b, maxm_d;
    int runs_b, runs_d, ncyc;
    logic last_b, last_d;
    for (int r = 0; r < NR; r++) begin
      rst_n = 1'b0; discharge = 1'b1; vref = 0.0;
      half_period = 0.5e9 / (real'(RATIO[r]) * FL);
      #200;
      rst_n = 1'b1; discharge = 1'b0;
      @(negedge clk);
      vref = 0.7; t0 = $realtime; tr_b[r] = -1.0; tr_d[r] = -1.0;
      while ((tr_b[r] < 0.0 || tr_d[r] < 0.0) && $realtime - t0 < 50000.0) begin
        #0.5;
        if (tr_b[r] < 0.0 && vout_b >= 0.665) tr_b[r] = $realtime - t0;
        if (tr_d[r] < 0.0 && vout_d >= 0.665) tr_d[r] = $realtime - t0;
      end
      check(tr_b[r] > 0.0 && tr_d[r] > 0.0, $sformatf("ratio %0d: no rise", RATIO[r]));
      repeat (400) @(posedge clk);
      ncyc = 400; runs_b = 0; runs_d = 0; vmin = 10.0; vmax = -10.0;
      last_b = cmp_b; last_d = cmp_d;
      repeat (ncyc) begin
        @(posedge clk); #0.1;
        if (cmp_b != last_b) runs_b++;
        if (cmp_d != last_d) runs_d++;
        last_b = cmp_b; last_d = cmp_d;
        if (vout_b < vmin) vmin = vout_b;
        if (vout_b > vmax) vmax = vout_b;
      end
      mode_b[r] = real'(ncyc) / real'(runs_b > 0 ? runs_b : 1);
      mode_d[r] = real'(ncyc) / real'(runs_d > 0 ? runs_d : 1);
      check(vmin > 0.665 && vmax < 0.735, $sformatf("ratio %0d: output left the band", RATIO[r]));
      $display("Fs/Fl=%2d Fs=%5.1f MHz: rise %7.1f / %7.1f ns, mode %5.2f / %5.2f (baseline / dual edge), vout %0.4f..%0.4f V",
               RATIO[r], real'(RATIO[r]) * FL / 1.0e6, tr_b[r], tr_d[r], mode_b[r], mode_d[r], vmin, vmax);
    end
    check(tr_b[0] > 3.0 * tr_b[NR-1], "baseline rise time did not fall with Fs/Fl");
    check(tr_d[0] > 3.0 * tr_d[NR-1], "dual-edge rise time did not fall with Fs/Fl");
    check(mode_b[NR-1] > mode_b[0], "baseline mode did not grow with Fs/Fl");
    check(mode_d[NR-1] > mode_d[0], "dual-edge mode did not grow with Fs/Fl");
    maxm_b = 0.0; maxm_d = 0.0;
    for (int r = 0; r < NR; r++) begin
      if (mode_b[r] > maxm_b) maxm_b = mode_b[r];
      if (mode_d[r] > maxm_d) maxm_d = mode_d[r];
    end
    check(maxm_d < maxm_b, "dual-edge maximum mode not below the baseline's");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
