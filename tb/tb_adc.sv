// tb_adc: self-checking testbench of the ADC model.
//
// Random channel voltages in [-0.25, 1.25] are converted; each code must be
// floor(v * 256) saturated to [0, 255]; done must pulse one clock after convert and
// the codes must hold until the next conversion.
module tb_adc;
  import tpu_imac_pkg::*;
  localparam int CH = 8;
  logic clk = 1'b0, rst_n = 1'b0, convert = 1'b0, done;
  volt_t [CH-1:0] vin = '0;
  logic [2:0] rd_ch = '0;
  logic [7:0] rd_code;
  int exp_code [CH];
  int checks = 0, failures = 0;

  adc #(.CH(CH), .BITS(8), .LATENCY(1)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      for (int c = 0; c < CH; c++) begin
        int v;
        v = int'($urandom % 385) - 64;
        vin[c] = volt_t'(v);
        exp_code[c] = (v < 0) ? 0 : (v > 255) ? 255 : v;
      end
      convert = 1; @(negedge clk); convert = 0;
      check(done, "done one clock after convert");
      vin = '0;
      @(negedge clk);
      check(!done, "done is a pulse");
      for (int c = 0; c < CH; c++) begin
        rd_ch = 3'(c); #1;
        check(int'(rd_code) == exp_code[c], $sformatf("ch %0d code %0d exp %0d", c, rd_code, exp_code[c]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
