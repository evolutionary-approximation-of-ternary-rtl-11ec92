// abc -- analog-to-binary converter (ABC); behavioural model of an analog part.
//
// This is a behavioural model, not synthesizable logic: the real part is a
// resistor divider and an analog comparator printed next to the sensor. R1
// runs from the shared reference rail Vref to the divider node and R2 from the
// node to ground, so the node sits at Vth = Vref * R2 / (R1 + R2). The
// comparator's + input is the sensor voltage Vin and its - input the divider
// node, so the 1-bit output is 1 when Vin > Vth and 0 otherwise. Choosing the
// ratio R1/R2 per input feature sets where that feature turns from 0 to 1.
//
// Interface: vin and vref are voltages (real, volts); out is the binary
// feature. Timing: the model is ideal and instantaneous, with no offset,
// hysteresis or delay; the real comparator's are not given. The circuit (two
// resistors, one comparator, + on Vin, - on the divider) follows the published
// schematic; resistor defaults are this model's own.
module abc #(
  parameter real R1 = 100.0e3,   // ohms, Vref to divider node
  parameter real R2 = 100.0e3    // ohms, divider node to ground
) (
  input  real  vin,
  input  real  vref,
  output logic out
);

  real vth;

  always_comb begin
    vth = vref * R2 / (R1 + R2);
    out = (vin > vth);
  end

endmodule
