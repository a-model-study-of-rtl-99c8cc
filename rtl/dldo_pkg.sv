// dldo_pkg: types and constants shared by the blocks of the all-digital,
// discrete-time linear regulator (digital LDO).
//
// The regulator has 128 equally sized PMOS pass devices. A 128-bit
// thermometer code says how many are on. Each clock, a one-bit comparator
// decides whether the output is below or above the reference. The code then
// moves up or down by the programmed step size K_FORWARD, which is 0, 1, 2 or 3.
// The step is built from two stages: a stage that shifts by 2 (enabled by
// mux1) and a stage that shifts by 1 (enabled by mux2).
package dldo_pkg;

  // Number of PMOS pass devices, and width of the thermometer code.
  localparam int unsigned N_PMOS = 128;

  // Programmable gain code {K1,K0}. The encoding of 1, 2 and 3 is the
  // paper's. Code 00 is this design's "hold" (step 0).
  typedef enum logic [1:0] {
    GAIN_0 = 2'b00,
    GAIN_1 = 2'b01,
    GAIN_2 = 2'b10,
    GAIN_3 = 2'b11
  } gain_e;

  // Common select lines of the two mux levels of the barrel shifter.
  //   mux1 : first level shifts by 2 (0 = hold)
  //   mux2 : second level shifts by 1 (0 = hold)
  typedef struct packed {
    logic mux1;
    logic mux2;
  } shift_sel_t;

  // Shift distance that a select pair gives, in code positions.
  function automatic int unsigned shift_amount(shift_sel_t s);
    return (s.mux1 ? 2 : 0) + (s.mux2 ? 1 : 0);
  endfunction

endpackage
