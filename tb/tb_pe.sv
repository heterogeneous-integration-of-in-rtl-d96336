// tb_pe: self-checking testbench of one processing element.
//
// Drives random FP32 operand pairs (valid or not), checks that operands and valid
// flags are forwarded right/down after one clock, that the accumulator follows the
// reference multiply-accumulate computed with double-precision reals, that clr
// zeroes it and that shift loads acc_in.
module tb_pe;
  import tb_fp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, shift = 1'b0;
  logic [31:0] w_in = '0, x_in = '0, acc_in = '0, w_out, x_out, acc_out;
  logic w_vin = 1'b0, x_vin = 1'b0, w_vout, x_vout;
  int checks = 0, failures = 0;
  logic [31:0] model;

  pe dut (.*);

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
    model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // a few exact cases
    w_in = 32'h3F80_0000; x_in = 32'h4000_0000; w_vin = 1; x_vin = 1;   // 1*2
    @(negedge clk);
    check(acc_out == 32'h4000_0000, "0 + 1*2 = 2");
    w_in = 32'hC040_0000; x_in = 32'h4000_0000;                          // -3*2
    @(negedge clk);
    check(acc_out == 32'hC080_0000, "2 - 6 = -4");
    w_vin = 0; x_vin = 0;
    clr = 1; @(negedge clk); clr = 0;
    check(acc_out == 32'd0, "clr");
    model = '0;
    for (int n = 0; n < 3000; n++) begin
      logic [31:0] a, b;
      logic va, vb;
      a = rand_f(); b = rand_f();
      va = ($urandom % 4) != 0; vb = ($urandom % 4) != 0;
      w_in = a; x_in = b; w_vin = va; x_vin = vb;
      if (n % 500 == 499) begin
        shift = 1; acc_in = rand_f();
      end
      @(negedge clk);
      check(w_out == a && x_out == b && w_vout == va && x_vout == vb, "forwarding");
      if (shift) model = acc_in;
      else if (va && vb) model = ref_mac(model, a, b);
      check(acc_out == model, $sformatf("acc n=%0d got %h exp %h", n, acc_out, model));
      shift = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
