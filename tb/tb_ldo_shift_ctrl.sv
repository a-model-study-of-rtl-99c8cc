// tb_ldo_shift_ctrl: exhaustive test of the select decoder.
// All 64 combinations of gain, window and direction are checked against the
// expected select pairs. These are written out row by row from the select
// and gain tables: the four printed rows, programmed gain elsewhere, hold for
// gain 00.
`timescale 1ns/1ps
module tb_ldo_shift_ctrl;
  import dldo_pkg::*;

  gain_e      k;
  logic [2:0] b;
  logic       d;
  shift_sel_t sel;
  int checks = 0, failures = 0;

  ldo_shift_ctrl dut (.k(k), .b(b), .d(d), .sel(sel));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [1:0] expected(logic [1:0] kk, logic [2:0] bb, logic dd);
    logic [1:0] gain_pair;
    // Gain table: 11 -> 3 (2+1), 10 -> 2 (2+0), 01 -> 1 (0+1), 00 -> 0.
    case (kk)
      2'b11: gain_pair = 2'b11;
      2'b10: gain_pair = 2'b10;
      2'b01: gain_pair = 2'b01;
      default: return 2'b00;
    endcase
    if (bb == 3'b000 && dd == 1'b1) return gain_pair;
    if (bb == 3'b001 && dd == 1'b1) return 2'b01;
    if (bb == 3'b011 && dd == 1'b0) return 2'b01;
    if (bb == 3'b111 && dd == 1'b0) return gain_pair;
    return gain_pair;
  endfunction

  initial begin
    for (int i = 0; i < 64; i++) begin
      k = gain_e'(i[5:4]);
      b = i[3:1];
      d = i[0];
      #1;
      checks++;
      if ({sel.mux1, sel.mux2} !== expected(k, b, d)) begin
        failures++;
        $display("k=%b b=%b d=%b: mux1,mux2=%b%b expected %b", k, b, d,
                 sel.mux1, sel.mux2, expected(k, b, d));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
