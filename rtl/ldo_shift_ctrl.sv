// ldo_shift_ctrl: select-line decoder of the barrel shifter.
//
// It drives the two common select lines of the barrel shifter. mux1 enables
// the stage that shifts by 2. mux2 enables the stage that shifts by 1. Normally
// mux1 = K1 and mux2 = K0, so the code moves by the programmed gain
// (11 -> 3, 10 -> 2, 01 -> 1), as the paper's gain table gives.
//
// The paper's select table also has rows that look at a 3-bit window
// {B2,B1,B0} and the direction d. Two of its rows force a step of 1:
//   B2B1B0 = 000, d = 1 -> (K1, K0)      B2B1B0 = 001, d = 1 -> (0, 1)
//   B2B1B0 = 011, d = 0 -> (0, 1)        B2B1B0 = 111, d = 0 -> (K1, K0)
// Only these four rows are printed. This design's own choices are:
//   - every other (window, d) pair gets the programmed gain;
//   - gain 00 (hold) holds in every row;
//   - the top wires the window to the three lowest code bits.
// The paper does not name the window's source.
//
// Purely combinational; no clock.
module ldo_shift_ctrl
  import dldo_pkg::*;
(
  input  gain_e      k,     // programmed gain {K1,K0}
  input  logic [2:0] b,     // window {B2,B1,B0}
  input  logic       d,     // direction, 1 = up (more devices on)
  output shift_sel_t sel    // {mux1, mux2}
);

  always_comb begin
    sel.mux1 = k[1];
    sel.mux2 = k[0];
    if (k != GAIN_0) begin
      unique case ({b, d})
        4'b001_1: begin sel.mux1 = 1'b0; sel.mux2 = 1'b1; end
        4'b011_0: begin sel.mux1 = 1'b0; sel.mux2 = 1'b1; end
        default:  ;  // includes the printed 000/1 and 111/0 rows: programmed gain
      endcase
    end
  end

endmodule
