// tb_tpu_imac_top: end-to-end testbench of the TPU-IMAC accelerator, at a reduced
// size: an 8 x 8 array (so a 64-input IMAC with two 64 x 64 subarrays) and 128-deep
// operand SRAMs. The structure is that of the default 32 x 32 design.
//
// A small CNN is run from LPDDR to LPDDR:
//   conv1  4x7x3 IFMap, 10 filters of 3x3x3, stride 1 -> 2x5x10, ReLU.
//          10 filters and 10 pixels need 2 x 2 tiles, the second ones partial, so
//          zero-filled SRAM lanes and skipped write-back items occur.
//   conv2  2x5x10 -> 2x4x8 with 1x2x10 filters: exactly one 8 x 8 tile, kept in
//          the PEs (no drain) for the FC part; no ReLU.
//   fc     two FC layers on the IMAC (64 -> 64 -> 64 neurons, 10 read out),
//          sparse random ternary weights, then the ADC; codes go to LPDDR.
// The reference is computed here: conv layers with the FP32 reference MAC in the
// accumulation order of the array, the FC layers with integer dot products and the
// piecewise-linear sigmoid. Checked: every conv1 OFMap word in LPDDR, every PE
// accumulator after conv2, every ADC code in LPDDR, that the FC group took one clock
// per FC layer, and that each mechanism (bank swaps, zero fill, skipped writes,
// ReLU clamping, the tri-state enable, the keep path, pixel-fold advance, ADC
// conversion) happened at least once.
module tb_tpu_imac_top;
  import tpu_imac_pkg::*;
  import tb_fp_pkg::*;
  localparam int N = 8, NI = N * N, NSUB = 2, DEPTH = 128;
  // conv1
  localparam int C1_IH = 4, C1_IW = 7, C1_C = 3, C1_R = 3, C1_S = 3, C1_F = 10;
  localparam int C1_OH = 2, C1_OW = 5, C1_K = C1_R * C1_S * C1_C, C1_P = C1_OH * C1_OW;
  // conv2
  localparam int C2_R = 1, C2_S = 2, C2_F = 8, C2_OH = 2, C2_OW = 4;
  localparam int C2_C = C1_F, C2_K = C2_R * C2_S * C2_C, C2_P = C2_OH * C2_OW;
  localparam int NOUT = 10;
  // LPDDR map (word addresses)
  localparam int A_IN = 0, A_W1 = 1024, A_O1 = 4096, A_W2 = 8192, A_OUT = 12288;

  logic clk = 1'b0, rst_n = 1'b0;
  logic mem_req, mem_we, mem_ack;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic tbl_we = 1'b0, start = 1'b0, busy, net_done;
  logic [4:0] tbl_addr = '0;
  layer_desc_t tbl_data = '0;
  logic [5:0] layers_run;
  logic prog_en = 1'b0, cfg_we = 1'b0;
  logic [1:0] prog_sub = '0, cfg_sb = '0, cfg_src = '0;
  logic [5:0] prog_row = '0;
  logic [NI-1:0][1:0] prog_w = '0;
  logic [31:0] fc_cycles;

  tpu_imac_top #(.N(N), .DEPTH(DEPTH)) dut (.*);
  lpddr_model #(.AW(16), .LAT(3)) u_mem (
    .clk, .rst_n, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .ack(mem_ack), .rdata(mem_rdata)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // ------------------------------------------------------------ reference data
  logic [31:0] in1 [C1_IH*C1_IW*C1_C];
  logic [31:0] w1  [C1_F*C1_K];
  logic [31:0] o1  [C1_P*C1_F];       // after ReLU, HWC
  logic [31:0] w2  [C2_F*C2_K];
  logic [31:0] o2  [C2_F][C2_P];      // pre-activation, [filter][pixel]
  byte         wt  [NSUB][NI][NI];    // ternary FC weights [layer][neuron][input]
  int          h1  [NI], h2 [NI];

  function automatic int plan_ref(input int v);
    real x, ax, y;
    x = real'(v) / 256.0;
    ax = (x < 0) ? -x : x;
    if (ax >= 5.0)        y = 1.0;
    else if (ax >= 2.375) y = 0.03125 * ax + 0.84375;
    else if (ax >= 1.0)   y = 0.125 * ax + 0.625;
    else                  y = 0.25 * ax + 0.5;
    if (x < 0) return 256 - int'($floor(y * 256.0 + 1e-9));
    return int'($floor(y * 256.0 + 1e-9));
  endfunction

  // ------------------------------------------------------------ mechanism counters
  int n_in_swap = 0, n_of_swap = 0, n_zero_fill = 0, n_skip_wr = 0, n_relu = 0;
  int n_oe = 0, n_run = 0, n_convert = 0, n_adv_pix = 0, n_drain = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.in_swap) n_in_swap++;
    if (dut.of_swap) n_of_swap++;
    if (dut.in_wr_w || dut.in_wr_i) if (dut.gen_item.zero) n_zero_fill++;
    if (dut.gen_item_ready && dut.gen_item.zero && !dut.in_wr_w && !dut.in_wr_i) n_skip_wr++;
    if (dut.act_in_valid && dut.act_relu && dut.act_in_data[31]) n_relu++;
    if (dut.bridge_oe) n_oe++;
    if (dut.imac_run) n_run++;
    if (dut.adc_convert) n_convert++;
    if (dut.gen_cmd_valid && dut.gen_cmd_ready && dut.gen_cmd == C_ADV_PIX) n_adv_pix++;
    if (dut.arr_shift) n_drain++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_layer(input int idx, input layer_desc_t d);
    @(negedge clk); tbl_we = 1; tbl_addr = 5'(idx); tbl_data = d;
    @(negedge clk); tbl_we = 0;
  endtask

  initial begin
    layer_desc_t d;
    int cyc;
    // ---------------- data
    foreach (in1[k]) in1[k] = rand_f();
    foreach (w1[k])  w1[k]  = rand_f();
    foreach (w2[k])  w2[k]  = rand_f();
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < NI; r++)
        for (int i = 0; i < NI; i++) begin
          int u;
          u = int'($urandom % 8);
          wt[s][r][i] = (u == 0) ? 8'sd1 : (u == 1) ? -8'sd1 : 8'sd0;
        end
    foreach (in1[k]) u_mem.mem[A_IN + k] = in1[k];
    foreach (w1[k])  u_mem.mem[A_W1 + k] = w1[k];
    foreach (w2[k])  u_mem.mem[A_W2 + k] = w2[k];
    // ---------------- reference: conv1 (+ReLU), conv2, FC
    for (int p = 0; p < C1_P; p++)
      for (int f = 0; f < C1_F; f++) begin
        logic [31:0] a;
        int oy, ox;
        oy = p / C1_OW; ox = p % C1_OW;
        a = '0;
        for (int r = 0; r < C1_R; r++)
          for (int s = 0; s < C1_S; s++)
            for (int c = 0; c < C1_C; c++)
              a = ref_mac(a, w1[f*C1_K + (r*C1_S + s)*C1_C + c],
                          in1[((oy + r)*C1_IW + ox + s)*C1_C + c]);
        o1[p*C1_F + f] = a[31] ? 32'd0 : a;
      end
    for (int p = 0; p < C2_P; p++)
      for (int f = 0; f < C2_F; f++) begin
        logic [31:0] a;
        int oy, ox;
        oy = p / C2_OW; ox = p % C2_OW;
        a = '0;
        for (int r = 0; r < C2_R; r++)
          for (int s = 0; s < C2_S; s++)
            for (int c = 0; c < C2_C; c++)
              a = ref_mac(a, w2[f*C2_K + (r*C2_S + s)*C2_C + c],
                          o1[((oy + r)*C1_OW + ox + s)*C2_C + c]);
        o2[f][p] = a;
      end
    for (int r = 0; r < NI; r++) begin
      int a;
      a = 0;
      for (int i = 0; i < NI; i++)   // IMAC line i = pixel*N + filter
        a += int'(wt[0][r][i]) * (o2[i % N][i / N][31] ? -256 : 256);
      h1[r] = plan_ref(a);
    end
    for (int r = 0; r < NI; r++) begin
      int a;
      a = 0;
      for (int i = 0; i < NI; i++) a += int'(wt[1][r][i]) * h1[i];
      h2[r] = plan_ref(a);
    end

    // ---------------- reset and configuration phase
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < NI; r++) begin
        @(negedge clk);
        prog_en = 1; prog_sub = 2'(s); prog_row = 6'(r);
        for (int i = 0; i < NI; i++)
          prog_w[i] = (wt[s][r][i] == 1) ? W_POS : (wt[s][r][i] == -1) ? W_NEG : W_ZERO;
      end
    @(negedge clk); prog_en = 0;
    @(negedge clk); cfg_we = 1; cfg_sb = 0; cfg_src = 0;   // subarray 0 <- PEs
    @(negedge clk); cfg_sb = 1; cfg_src = 1;               // subarray 1 <- subarray 0
    @(negedge clk); cfg_sb = 2; cfg_src = 1;               // ADC <- subarray 1
    @(negedge clk); cfg_we = 0;

    // ---------------- layer table
    d = '0; d.kind = L_CONV; d.ih = C1_IH; d.iw = C1_IW; d.ch = C1_C; d.fr = C1_R; d.fs = C1_S;
    d.stride = 1; d.nfilt = C1_F; d.oh = C1_OH; d.ow = C1_OW; d.relu = 1;
    d.ibase = A_IN; d.wbase = A_W1; d.obase = A_O1;
    write_layer(0, d);
    d = '0; d.kind = L_CONV; d.ih = C1_OH; d.iw = C1_OW; d.ch = C2_C; d.fr = C2_R; d.fs = C2_S;
    d.stride = 1; d.nfilt = C2_F; d.oh = C2_OH; d.ow = C2_OW; d.keep = 1;
    d.ibase = A_O1; d.wbase = A_W2; d.obase = 0;
    write_layer(1, d);
    d = '0; d.kind = L_FC; d.nfc = NSUB; d.nfilt = NOUT; d.obase = A_OUT;
    write_layer(2, d);
    d = '0; d.kind = L_END;
    write_layer(3, d);

    // ---------------- run
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!net_done) begin @(negedge clk); cyc++; end
    $display("network done in %0d cycles", cyc);

    check(int'(layers_run) == 3, "three layers run");
    for (int k = 0; k < C1_P*C1_F; k++)
      check(u_mem.mem[A_O1 + k] == o1[k], $sformatf("conv1 ofmap %0d got %h exp %h", k, u_mem.mem[A_O1 + k], o1[k]));
    for (int f = 0; f < C2_F; f++)
      for (int p = 0; p < C2_P; p++)
        check(dut.acc[f][p] == o2[f][p], $sformatf("conv2 PE(%0d,%0d) got %h exp %h", f, p, dut.acc[f][p], o2[f][p]));
    for (int k = 0; k < NOUT; k++) begin
      int e;
      e = (h2[k] > 255) ? 255 : h2[k];
      check(u_mem.mem[A_OUT + k] == 32'(e), $sformatf("ADC code %0d got %0d exp %0d", k, u_mem.mem[A_OUT + k], e));
    end
    check(fc_cycles == 32'(NSUB), $sformatf("FC group took %0d clocks for %0d FC layers", fc_cycles, NSUB));
    // mechanisms
    $display("swaps in %0d out %0d, zero fill %0d, skipped writes %0d, relu %0d, oe %0d, run %0d, convert %0d, adv_pix %0d, drain %0d",
             n_in_swap, n_of_swap, n_zero_fill, n_skip_wr, n_relu, n_oe, n_run, n_convert, n_adv_pix, n_drain);
    check(n_in_swap == 5, "input SRAM bank swaps: 4 tiles of conv1 + 1 of conv2");
    check(n_of_swap == 4, "OFMap SRAM bank swaps: one per conv1 tile");
    check(n_zero_fill > 0, "zero fill of lanes outside the layer");
    check(n_skip_wr > 0, "skipped write-back items");
    check(n_relu > 0, "ReLU clamping");
    check(n_oe == NSUB && n_run == NSUB, "tri-state enable and IMAC run, one clock per FC layer");
    check(n_convert == 1, "one ADC conversion");
    check(n_adv_pix == 1, "pixel fold advance");
    check(n_drain == 4 * N, "drain only for conv1 tiles (conv2 kept in the PEs)");
    $display("LPDDR reads %0d writes %0d", u_mem.n_reads, u_mem.n_writes);
    check(u_mem.n_writes == C1_P*C1_F + NOUT, "LPDDR writes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
