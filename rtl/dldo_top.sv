// dldo_top: the all-digital, discrete-time linear regulator (digital LDO).
//
// The loop is a bang-bang integrator. At every rising clk edge, the
// comparator checks whether VOUT is below VREF. The barrel shifter then moves
// a 128-bit thermometer code up or down by the programmed step K_FORWARD
// (0..3 positions). Each 1 in the code turns on one PMOS pass device from VIN
// to VOUT. In steady state, the code settles into a limit cycle around the
// number of devices that the load needs.
//
//   vout --> ldo_comparator --d--> ldo_shift_ctrl --sel--> ldo_barrel_shifter
//                                    ^   ^                      |
//                        ldo_gain_reg k   code[2:0]             code
//                                                               v
//                                    vin --> ldo_pmos_array --> iout (into VOUT)
//
// The load (R_L) and the grid capacitance (C_L) are outside this block. They
// integrate iout into vout, which comes back in as an input port.
//
// The comparator and the PMOS array are analog parts, given here as
// behavioural models with real-valued ports. The gain register, shift
// control and barrel shifter are synthesizable logic.
//
// Timing:
//   DUAL_EDGE = 0: the decision taken at rising edge n is applied at rising
//     edge n+1 (one cycle of transport delay, the paper's baseline).
//   DUAL_EDGE = 1: the decision is applied at the falling edge of the same
//     cycle (half a cycle of delay, the paper's dual-edge variant).
// A gain write (gain_wr_en, gain_wr_k) takes effect from the next rising edge.
// rst_n (asynchronous, active low) turns all devices off and sets gain 1.
module dldo_top
  import dldo_pkg::*;
#(
  parameter int unsigned N         = N_PMOS,
  parameter bit          DUAL_EDGE = 1'b0
) (
  input  logic         clk,          // sampling clock, frequency Fs
  input  logic         rst_n,
  input  logic         gain_wr_en,   // gain register write strobe
  input  gain_e        gain_wr_k,    // new K_FORWARD code {K1,K0}
  input  real          vref,         // reference voltage, V
  input  real          vin,          // supply voltage, V
  input  real          vout,         // regulated output node, V
  output real          iout,         // current delivered into vout, A
  output logic [N-1:0] code,         // thermometer code, bit n = device n+1 on
  output logic         cmp_out,      // comparator decision, 1 = vout below vref
  output gain_e        gain_k        // programmed gain
);

  shift_sel_t sel;

  ldo_comparator u_cmp (
    .clk (clk),
    .vref(vref),
    .vout(vout),
    .dout(cmp_out)
  );

  ldo_gain_reg u_gain (
    .clk  (clk),
    .rst_n(rst_n),
    .wr_en(gain_wr_en),
    .wr_k (gain_wr_k),
    .k    (gain_k)
  );

  ldo_shift_ctrl u_ctrl (
    .k  (gain_k),
    .b  (code[2:0]),
    .d  (cmp_out),
    .sel(sel)
  );

  ldo_barrel_shifter #(.N(N), .DUAL_EDGE(DUAL_EDGE)) u_shift (
    .clk  (clk),
    .rst_n(rst_n),
    .d    (cmp_out),
    .sel  (sel),
    .a    (code)
  );

  // PMOS gates are active low: a 1 in the code pulls its gate low.
  ldo_pmos_array #(.N(N)) u_pmos (
    .gate_n(~code),
    .vin   (vin),
    .vout  (vout),
    .iout  (iout)
  );

endmodule
