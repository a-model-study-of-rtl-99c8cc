// ldo_load_model: behavioural model of the regulator's load and grid, used
// only by the testbenches. It is a resistive load r_load in parallel with
// the grid and decoupling capacitance C_L (1 nF). It integrates
//     C_L dV/dt = iin - V / r_load
// with a forward-Euler step every DT_NS nanoseconds. While discharge is high,
// the node is held at 0 V. r_load may change at any time, which gives a load
// step.
`timescale 1ns/1ps
module ldo_load_model #(
  parameter real C_L   = 1.0e-9,   // F
  parameter real DT_NS = 0.25      // integration step, ns
) (
  input  real  iin,        // current from the PMOS array, A
  input  real  r_load,     // load resistance, ohm
  input  logic discharge,  // hold the node at 0 V
  output real  vout        // node voltage, V
);
  real v = 0.0;

  initial vout = 0.0;

  always #(DT_NS) begin
    if (discharge) v = 0.0;
    else           v = v + (iin - v / r_load) * (DT_NS * 1.0e-9) / C_L;
    vout = v;
  end
endmodule
