// tb_activation_unit: self-checking testbench of the activation unit.
//
// Random FP32 words with ReLU on and off; negative words must become +0.0 when ReLU
// is on and pass unchanged otherwise, one cycle later with out_valid.
module tb_activation_unit;
  logic clk = 1'b0, rst_n = 1'b0, relu_en = 1'b0, in_valid = 1'b0, out_valid;
  logic [31:0] in_data = '0, out_data;
  int checks = 0, failures = 0, n_clamped = 0;

  activation_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] d, e;
      logic r;
      d = $urandom; r = 1'($urandom);
      @(negedge clk);
      in_valid = 1; in_data = d; relu_en = r;
      @(negedge clk);
      in_valid = 0;
      e = (r && d[31]) ? 32'd0 : d;
      if (r && d[31]) n_clamped++;
      check(out_valid && out_data == e, $sformatf("in %h relu %0d out %h", d, r, out_data));
      @(negedge clk);
      check(!out_valid, "valid one cycle");
    end
    check(n_clamped > 0, "ReLU exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
