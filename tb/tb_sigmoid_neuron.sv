// tb_sigmoid_neuron: self-checking testbench of the sigmoid neuron model.
//
// Sweeps the input over [-8, 8] and checks (a) monotonicity, (b) the output against
// the logistic function 1/(1+exp(-x)) within 0.025 (the piecewise-linear curve's
// error is below 0.02 plus one LSB) and (c) exact values at the breakpoints.
module tb_sigmoid_neuron;
  import tpu_imac_pkg::*;
  volt_t vin = '0, vout, prev;
  int checks = 0, failures = 0;

  sigmoid_neuron dut (.vin, .vout);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prev = '0;
    for (int v = -2048; v <= 2048; v++) begin
      real x, y, l;
      vin = volt_t'(v);
      #1;
      x = real'(v) / 256.0;
      y = real'(vout) / 256.0;
      l = 1.0 / (1.0 + $exp(-x));
      check(y - l < 0.025 && l - y < 0.025, $sformatf("x=%f y=%f logistic=%f", x, y, l));
      if (v > -2048) check(vout >= prev, "monotone");
      prev = vout;
    end
    vin = 0;        #1; check(vout == 128, "sigmoid(0) = 0.5");
    vin = 256;      #1; check(vout == 192, "sigmoid(1) = 0.75 (PLAN)");
    vin = 5 * 256;  #1; check(vout == 256, "sigmoid(5) = 1");
    vin = -5 * 256; #1; check(vout == 0, "sigmoid(-5) = 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
