// tb_main_controller: self-checking testbench of the Main Controller.
//
// The controller is connected to the real dataflow generator and an LPDDR model;
// the datapath around it (SRAM read latency, the array's busy time, the activation
// unit's latency, the ADC) is emulated by the testbench. Three layers are issued:
//   conv   4 x 4 array, 6 filters, 1x5 OFMap, K = 2: 2 x 2 tiles. Checked: LPDDR
//          reads (only for items inside the layer), K stream cycles, one input bank
//          swap, N drain cycles and one OFMap swap per tile, and each OFMap word
//          written to its HWC address with the data read from the OFMap SRAM;
//   keep   one-tile conv whose OFMaps stay in the array: no drain, no writes;
//   fc     three FC layers: tri-state enable and IMAC run for exactly three clocks,
//          one ADC conversion, ten codes written, fc_cycles = 3.
module tb_main_controller;
  import tpu_imac_pkg::*;
  localparam int N = 4, DEPTH = 16, CH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req = 1'b0, layer_done;
  layer_desc_t layer = '0;
  logic gen_cmd_valid, gen_cmd_ready, gen_item_valid, gen_item_ready, gen_done;
  df_cmd_t gen_cmd;
  logic [15:0] gen_frow;
  df_item_t gen_item;
  logic mem_req, mem_we, mem_ack;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic in_wr_w, in_wr_i, in_rd_en, in_swap;
  logic [1:0] in_wr_lane;
  logic [3:0] in_wr_addr, in_rd_addr;
  logic [31:0] in_wr_data;
  logic arr_clr, arr_shift, arr_busy;
  logic of_wr_en, of_swap, of_rd_en, of_rd_valid;
  logic [1:0] of_wr_addr, of_rd_addr, of_rd_lane;
  logic [31:0] of_rd_data, act_in_data, act_out_data;
  logic act_relu, act_in_valid, act_out_valid;
  logic bridge_oe, imac_run, adc_convert, adc_done;
  logic [3:0] adc_rd_ch;
  logic [7:0] adc_rd_code;
  logic [31:0] fc_cycles;
  int checks = 0, failures = 0;

  main_controller #(.N(N), .DEPTH(DEPTH), .CH(CH), .BITS(8)) dut (.*);
  dataflow_generator #(.N(N)) u_gen (
    .clk, .rst_n, .layer, .cmd_valid(gen_cmd_valid), .cmd(gen_cmd), .frow(gen_frow),
    .cmd_ready(gen_cmd_ready), .item_valid(gen_item_valid), .item_ready(gen_item_ready),
    .item(gen_item), .done(gen_done)
  );
  lpddr_model #(.AW(12), .LAT(2)) u_mem (
    .clk, .rst_n, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .ack(mem_ack), .rdata(mem_rdata)
  );

  // ---- emulated datapath
  int busy_cnt = 0;
  always_ff @(posedge clk) begin
    of_rd_valid   <= of_rd_en;
    if (of_rd_en) of_rd_data <= 32'h1000 * of_rd_addr + 32'(of_rd_lane);
    act_out_valid <= act_in_valid;
    act_out_data  <= act_in_data;
    adc_done      <= adc_convert;
    if (in_rd_en) busy_cnt <= 2 * N;
    else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
  end
  assign arr_busy    = (busy_cnt > 0) || in_rd_en;
  assign adc_rd_code = 8'(adc_rd_ch * 3 + 1);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // ---- event counters
  int n_stream, n_swap, n_drain, n_ofswap, n_oe, n_run, n_conv;
  always @(posedge clk) begin
    if (in_rd_en) n_stream++;
    if (in_swap) n_swap++;
    if (arr_shift) n_drain++;
    if (of_swap) n_ofswap++;
    if (bridge_oe) n_oe++;
    if (imac_run) n_run++;
    if (adc_convert) n_conv++;
  end

  task automatic run_layer(input layer_desc_t d);
    int c;
    n_stream = 0; n_swap = 0; n_drain = 0; n_ofswap = 0; n_oe = 0; n_run = 0; n_conv = 0;
    u_mem.n_reads = 0; u_mem.n_writes = 0;
    @(negedge clk); layer = d; req = 1;
    c = 0;
    while (!layer_done) begin @(negedge clk); c++; end
    check(c > 0, "layer takes time");
    req = 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_desc_t d;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 4096; k++) u_mem.mem[k] = 32'hDEAD_0000 + 32'(k);
    // ---------------- conv layer: 6 filters x 5 pixels, K = 2
    d = '0; d.kind = L_CONV; d.ih = 1; d.iw = 5; d.ch = 2; d.fr = 1; d.fs = 1; d.stride = 1;
    d.nfilt = 6; d.oh = 1; d.ow = 5; d.ibase = 100; d.wbase = 200; d.obase = 1000;
    for (int k = 0; k < 30; k++) u_mem.mem[1000 + k] = '0;
    run_layer(d);
    // per tile: weight reads = valid filters * K, IFMap reads = valid pixels * K
    check(u_mem.n_reads == (4*2 + 2*2) * 2 + (4*2 + 1*2) * 2, $sformatf("LPDDR reads %0d", u_mem.n_reads));
    check(u_mem.n_writes == 30, $sformatf("LPDDR writes %0d", u_mem.n_writes));
    check(n_stream == 4 * 2, "K stream cycles per tile");
    check(n_swap == 4 && n_ofswap == 4, "one bank swap per tile");
    check(n_drain == 4 * N, "N drain cycles per tile");
    for (int p = 0; p < 5; p++)
      for (int f = 0; f < 6; f++)
        check(u_mem.mem[1000 + p*6 + f] == 32'h1000 * (f % N) + 32'(p % N),
              $sformatf("OFMap p %0d f %0d = %h", p, f, u_mem.mem[1000 + p*6 + f]));
    // ---------------- conv layer kept in the array
    d.nfilt = 4; d.ow = 4; d.iw = 4; d.keep = 1;
    run_layer(d);
    check(n_drain == 0 && u_mem.n_writes == 0 && n_ofswap == 0, "keep: no drain, no write-back");
    check(n_stream == 2 && n_swap == 1, "keep: one tile computed");
    // ---------------- FC group of three layers
    d = '0; d.kind = L_FC; d.nfc = 3; d.nfilt = 10; d.obase = 2000;
    run_layer(d);
    check(n_oe == 3 && n_run == 3, $sformatf("IMAC enabled %0d / run %0d clocks", n_oe, n_run));
    check(fc_cycles == 3, "fc_cycles");
    check(n_conv == 1, "one ADC conversion");
    check(u_mem.n_writes == 10, "ten ADC codes written");
    for (int k = 0; k < 10; k++)
      check(u_mem.mem[2000 + k] == 32'(k * 3 + 1), $sformatf("ADC code %0d", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
