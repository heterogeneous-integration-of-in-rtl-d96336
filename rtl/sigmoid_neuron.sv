// sigmoid_neuron: behavioural model of the IMAC's analog sigmoid neuron.
//
// The real neuron is two resistive devices forming a voltage divider in front of a
// CMOS inverter; the divider flattens the inverter's transfer curve into a smooth
// sigmoid. Its input is a differential amplifier's output voltage, its output a
// voltage in [0, 1] (relative to the supply). This model is not synthesizable
// hardware in the sense of the real part; it reproduces the transfer function only,
// with node voltages carried as fixed-point numbers (tpu_imac_pkg::volt_t, +1.0 =
// 2**VFRAC).
//
// The paper gives the circuit's structure and that it realises a sigmoid. The exact
// curve is not given; this model uses the piecewise-linear PLAN approximation of the
// logistic function (tpu_imac_pkg::sigmoid_plan). Combinational, no delay.
module sigmoid_neuron
  import tpu_imac_pkg::*;
(
  input  volt_t vin,
  output volt_t vout
);
  assign vout = sigmoid_plan(vin);
endmodule
