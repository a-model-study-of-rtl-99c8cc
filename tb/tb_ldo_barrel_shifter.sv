// tb_ldo_barrel_shifter: self-checking test of the 128-bit barrel shifter,
// baseline (rising-edge) and dual-edge (falling-edge) builds side by side.
//
// Every cycle a random direction and step (0..3) is applied to both. The
// reference is an integer device count: count = clamp(count +/- step, 0,
// 128), and the expected word has ones exactly in bits 0..count-1. The
// direction is biased in phases, so both saturation ends are reached.
// Timing checks:
//   - the rising-edge build changes only at rising edges (one cycle per step);
//   - the dual-edge build applies the same input at the falling edge, half a
//     cycle earlier, and holds across the rising edge.
`timescale 1ns/1ps
module tb_ldo_barrel_shifter;
  import dldo_pkg::*;
  localparam int N = 128;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic d = 1'b0;
  shift_sel_t sel = '0;
  logic [N-1:0] a_pos, a_neg;
  int cnt_pos = 0, cnt_neg = 0;
  int checks = 0, failures = 0;
  int hit_full = 0, hit_empty = 0;
  int hit_step [4] = '{0, 0, 0, 0};

  ldo_barrel_shifter #(.N(N), .DUAL_EDGE(1'b0)) dut_pos (
    .clk(clk), .rst_n(rst_n), .d(d), .sel(sel), .a(a_pos));
  ldo_barrel_shifter #(.N(N), .DUAL_EDGE(1'b1)) dut_neg (
    .clk(clk), .rst_n(rst_n), .d(d), .sel(sel), .a(a_neg));

  always #10 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] therm(int c);
    logic [N-1:0] w;
    for (int i = 0; i < N; i++) w[i] = (i < c);
    return w;
  endfunction

  function automatic int step_of(logic dd, shift_sel_t s, int c);
    int st, r;
    st = (s.mux1 ? 2 : 0) + (s.mux2 ? 1 : 0);
    r = dd ? c + st : c - st;
    if (r < 0) r = 0;
    if (r > N) r = N;
    return r;
  endfunction

  initial begin
    int p_up;
    #25;
    checks += 2;
    if (a_pos !== '0) begin failures++; $display("reset: a_pos not zero"); end
    if (a_neg !== '0) begin failures++; $display("reset: a_neg not zero"); end
    @(posedge clk); #2;
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      case ((i / 150) % 4)
        0: p_up = 90;
        1: p_up = 10;
        2: p_up = 50;
        default: p_up = 70;
      endcase
      // Inputs change 2 ns after a rising edge.
      d        = ($urandom_range(0, 99) < p_up);
      sel.mux1 = 1'($urandom_range(0, 1));
      sel.mux2 = 1'($urandom_range(0, 1));
      hit_step[shift_amount(sel)]++;
      // Falling edge: the dual-edge build takes the step.
      @(negedge clk);
      cnt_neg = step_of(d, sel, cnt_neg);
      #1;
      checks++;
      if (a_neg !== therm(cnt_neg)) begin
        failures++;
        $display("cycle %0d: dual-edge word %h, expected count %0d", i, a_neg, cnt_neg);
      end
      checks++;
      if (a_pos !== therm(cnt_pos)) begin
        failures++;
        $display("cycle %0d: baseline word changed before the rising edge", i);
      end
      // Rising edge: the baseline build takes the step.
      @(posedge clk);
      cnt_pos = step_of(d, sel, cnt_pos);
      #1;
      checks++;
      if (a_pos !== therm(cnt_pos)) begin
        failures++;
        $display("cycle %0d: baseline word %h, expected count %0d", i, a_pos, cnt_pos);
      end
      checks++;
      if (a_neg !== therm(cnt_neg)) begin
        failures++;
        $display("cycle %0d: dual-edge word changed at the rising edge", i);
      end
      if (cnt_pos == N) hit_full++;
      if (cnt_pos == 0) hit_empty++;
      #1;
    end
    $display("saturated full %0d times, empty %0d times; steps 0/1/2/3: %0d/%0d/%0d/%0d",
             hit_full, hit_empty, hit_step[0], hit_step[1], hit_step[2], hit_step[3]);
    checks++;
    if (hit_full == 0 || hit_empty == 0) begin failures++; $display("a saturation end was never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
