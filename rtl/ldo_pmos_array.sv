// ldo_pmos_array: behavioural model of the power PMOS array (the regulator's
// output "DAC"). These are analog power devices, so they are modelled with
// real-valued ports and are not synthesizable.
//
// The array has N equally sized PMOS pass devices between VIN and VOUT. A
// device conducts when its gate is low. Each conducting device is modelled as
// a linear conductance G_ON. The default G_ON is sized so that all 128
// devices deliver 3.5 mA at VOUT = 0.7 V from VIN = 1 V, the paper's
// full-load figure. The current is therefore
//     iout = (number of gates low) * G_ON * (vin - vout),
// and it is clamped at 0 when vout > vin (no reverse conduction, this
// model's choice).
//
// No timing: iout follows gate_n and the voltages at once (continuous time).
module ldo_pmos_array #(
  parameter int unsigned N    = 128,
  parameter real         G_ON = 3.5e-3 / (128.0 * 0.3)   // S per device
) (
  input  logic [N-1:0] gate_n,   // 0 = device on
  input  real          vin,      // supply, V
  input  real          vout,     // output node, V
  output real          iout      // current into the output node, A
);

  int unsigned n_on;

  always_comb begin
    n_on = 0;
    for (int i = 0; i < int'(N); i++) n_on += {31'd0, ~gate_n[i]};
  end

  always_comb begin
    if (vin > vout) iout = real'(n_on) * G_ON * (vin - vout);
    else            iout = 0.0;
  end

endmodule
