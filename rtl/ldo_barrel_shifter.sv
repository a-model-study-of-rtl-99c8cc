// ldo_barrel_shifter: 128-bit bidirectional thermometer-code shift register.
//
// This is the discrete-time integrator of the regulator. The code A is a
// thermometer word: bits 0..D-1 are 1, and bit n turns on PMOS device n+1.
// Each active clock edge moves the boundary up (d = 1) or down (d = 0) by
// 2*mux1 + mux2, that is by 0 to 3 positions. So D(n) = D(n-1) + K*e(n-1),
// where e = +1 or -1 is the previous comparator decision.
//
// Structure (the paper's): N identical slices, each with two 4:1 muxes and a
// storage bit (see ldo_shift_slice). The first level shifts by 0 or 2, the
// second by 0 or 1, and the select lines d, mux1 and mux2 are common to all
// slices.
//
// Ends (this design's choice): below bit 0 the word is padded with ones, and
// above bit N-1 with zeros. So the code saturates at all-on and at all-off.
//
// Timing: d and sel are sampled at the active edge. That is the rising edge
// for DUAL_EDGE = 0, and the falling edge for DUAL_EDGE = 1, which halves the
// loop delay. In the baseline, the comparator decides at rising edge n-1 and
// the shifter applies that decision at rising edge n, a delay of one cycle.
// Reset (asynchronous, active low) turns all devices off.
module ldo_barrel_shifter
  import dldo_pkg::*;
#(
  parameter int unsigned N         = N_PMOS,
  parameter bit          DUAL_EDGE = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         d,
  input  shift_sel_t   sel,
  output logic [N-1:0] a
);

  // Padded copies: index i+2 of a_x is A_i, index i+1 of b_x is B_i.
  logic [N+3:0] a_x;
  logic [N+1:0] b_x;
  logic [N-1:0] b;

  assign a_x = {2'b00, a, 2'b11};
  assign b_x = {1'b0, b, 1'b1};

  for (genvar n = 0; n < N; n++) begin : g_slice
    ldo_shift_slice #(.DUAL_EDGE(DUAL_EDGE)) u_slice (
      .clk  (clk),
      .rst_n(rst_n),
      .d    (d),
      .mux1 (sel.mux1),
      .mux2 (sel.mux2),
      .a_m2 (a_x[n]),       // A_(n-2)
      .a_p2 (a_x[n+4]),     // A_(n+2)
      .b_m1 (b_x[n]),       // B_(n-1)
      .b_p1 (b_x[n+2]),     // B_(n+1)
      .b_n  (b[n]),
      .a_n  (a[n])
    );
  end

  // The word stays a thermometer code: ones only below the first zero.
  // Not checked while rst_n is low (the bits are unknown until reset acts).
  a_is_thermometer: assert property (
    @(posedge clk) disable iff (!rst_n) ((a & (a + 1'b1)) == '0)
  ) else $error("barrel shifter word is not a thermometer code: %h", a);

endmodule
