// tb_imac_switch_box: self-checking testbench of the switch block.
//
// Programs each source in turn and checks that exactly that source's bus appears at
// the output and stays routed after the configuration strobe is gone.
module tb_imac_switch_box;
  import tpu_imac_pkg::*;
  localparam int NIN = 8, NSRC = 3;
  logic clk = 1'b0, rst_n = 1'b0, cfg_we = 1'b0;
  logic [1:0] cfg_src = '0;
  volt_t [NSRC-1:0][NIN-1:0] src = '0;
  volt_t [NIN-1:0] dst;
  int checks = 0, failures = 0;

  imac_switch_box #(.NIN(NIN), .NSRC(NSRC)) dut (.*);

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
    for (int n = 0; n < 60; n++) begin
      int s;
      s = n % NSRC;
      for (int k = 0; k < NSRC; k++)
        for (int i = 0; i < NIN; i++) src[k][i] = volt_t'($urandom);
      @(negedge clk);
      if (n == 0) check(dst == src[0], "reset routes source 0");
      cfg_we = 1; cfg_src = 2'(s);
      @(negedge clk);
      cfg_we = 0; cfg_src = 2'((s + 1) % NSRC);
      for (int k = 0; k < NSRC; k++)
        for (int i = 0; i < NIN; i++) src[k][i] = volt_t'($urandom);
      @(negedge clk);
      check(dst == src[s], $sformatf("source %0d routed", s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
