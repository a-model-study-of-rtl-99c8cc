// ldo_shift_slice: one bit slice n of the barrel shifter.
//
// Two 4:1 muxes and a storage element, as in the paper's slice drawing:
//   first mux : B_n = A_n (hold), A_(n-2) (up by 2) or A_(n+2) (down by 2)
//   second mux: F_n = B_n (hold), B_(n-1) (up by 1) or B_(n+1) (down by 1)
//   storage   : A_n <= F_n on the active clock edge
// Each mux has select S0 = d (1 = up) and S1 = mux1 or mux2 (1 = shift). The
// paper prints the mux inputs but not which select code picks which input.
// This mapping is chosen because it is the one that fits the paper's gain
// table.
//
// DUAL_EDGE = 0: A_n updates on the rising clock edge (the baseline).
// DUAL_EDGE = 1: A_n updates on the falling edge (the dual-edge variant).
// Reset (asynchronous, active low) clears the bit, so the device is off.
module ldo_shift_slice #(
  parameter bit DUAL_EDGE = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,        // direction, 1 = up
  input  logic mux1,     // enable shift by 2
  input  logic mux2,     // enable shift by 1
  input  logic a_m2,     // A_(n-2)
  input  logic a_p2,     // A_(n+2)
  input  logic b_m1,     // B_(n-1)
  input  logic b_p1,     // B_(n+1)
  output logic b_n,      // B_n, to the neighbouring slices
  output logic a_n       // A_n, stored bit
);

  logic f_n;

  // Four inputs in select order {S1,S0}: A_n, A_n, A_(n+2), A_(n-2).
  always_comb begin
    unique case ({mux1, d})
      2'b00, 2'b01: b_n = a_n;
      2'b10:        b_n = a_p2;
      2'b11:        b_n = a_m2;
    endcase
  end

  // Four inputs in select order {S1,S0}: B_n, B_n, B_(n+1), B_(n-1).
  always_comb begin
    unique case ({mux2, d})
      2'b00, 2'b01: f_n = b_n;
      2'b10:        f_n = b_p1;
      2'b11:        f_n = b_m1;
    endcase
  end

  if (DUAL_EDGE) begin : g_neg
    always_ff @(negedge clk or negedge rst_n) begin
      if (!rst_n) a_n <= 1'b0;
      else        a_n <= f_n;
    end
  end else begin : g_pos
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) a_n <= 1'b0;
      else        a_n <= f_n;
    end
  end

endmodule
