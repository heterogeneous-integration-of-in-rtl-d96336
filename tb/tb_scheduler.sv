// tb_scheduler: self-checking testbench of the layer scheduler.
//
// Programs a table of conv, conv, FC, END entries, starts it and acts as the Main
// Controller with random completion delays: the layers must be issued in order, one
// at a time, and the run must end at the END entry with net_done and the right layer
// count. A second run with a full table (no END) must stop after the last entry.
module tb_scheduler;
  import tpu_imac_pkg::*;
  localparam int ML = 8;
  logic clk = 1'b0, rst_n = 1'b0, tbl_we = 1'b0, start = 1'b0, busy, req, layer_done = 1'b0, net_done;
  logic [2:0] tbl_addr = '0;
  layer_desc_t tbl_data = '0, layer;
  logic [3:0] layers_run;
  int checks = 0, failures = 0;

  scheduler #(.MAX_LAYERS(ML)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic run_net(input int nlayers);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int l = 0; l < nlayers; l++) begin
      int wait_c;
      check(req && busy, $sformatf("req for layer %0d", l));
      check(layer.ibase == 32'(100 + l), $sformatf("layer %0d issued in order", l));
      wait_c = $urandom % 5;
      repeat (wait_c) begin @(negedge clk); check(layer.ibase == 32'(100 + l), "descriptor stable"); end
      layer_done = 1; @(negedge clk); layer_done = 0;
    end
    check(!req, "no request after the last layer");
    @(negedge clk);
    check(!busy && int'(layers_run) == nlayers, $sformatf("ran %0d layers", layers_run));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nd;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < ML; l++) begin
      @(negedge clk);
      tbl_we = 1; tbl_addr = 3'(l);
      tbl_data = '0;
      tbl_data.kind = (l < 2) ? L_CONV : (l == 2) ? L_FC : (l == 3) ? L_END : L_CONV;
      tbl_data.ibase = 32'(100 + l);
    end
    @(negedge clk); tbl_we = 0;
    fork
      run_net(3);
      begin nd = 0; repeat (60) begin @(posedge clk); if (net_done) nd++; end end
    join
    check(nd == 1, "one net_done pulse");
    // replace END by a conv layer: the whole table runs
    @(negedge clk); tbl_we = 1; tbl_addr = 3; tbl_data.kind = L_CONV; tbl_data.ibase = 103;
    @(negedge clk); tbl_we = 0;
    run_net(ML);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
