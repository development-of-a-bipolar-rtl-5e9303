// output_amp_model: behavioural model of one analog output stage of the DAC
// board, for testbenches only. A non-inverting amplifier with a 47 kOhm
// feedback resistor and a 5.1 kOhm resistor to ground has a gain of
// 1 + 47/5.1 = 10.2; its output is limited to the +/-52 V supply rails. The
// 2.4 kOhm series output resistor is ignored (unloaded output). Slew rate
// and bandwidth are not modelled.
module output_amp_model #(
  parameter real R_FB  = 47.0e3,
  parameter real R_GND = 5.1e3,
  parameter real RAIL  = 52.0
) (
  input  real vin,
  output real vout
);
  real v;
  always_comb begin
    v = vin * (1.0 + R_FB / R_GND);
    if (v > RAIL)       vout = RAIL;
    else if (v < -RAIL) vout = -RAIL;
    else                vout = v;
  end
endmodule
