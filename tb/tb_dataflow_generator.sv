// tb_dataflow_generator: self-checking testbench of the address-trace generator.
//
// A small convolution (N = 4 array, 5x5x2 IFMap with stride 1 and 2, 3x3 filters,
// 6 filters, so 2 filter folds and 3 pixel folds with partial folds) is traced. For
// every command the expected item sequence is worked out here with divisions
// ((oy, ox) = (p / OW, p % OW)) and compared item by item, with random back-pressure
// on item_ready; done must come with the last item.
module tb_dataflow_generator;
  import tpu_imac_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0, cmd_valid = 1'b0, cmd_ready, item_valid, item_ready = 1'b0, done;
  layer_desc_t layer;
  df_cmd_t cmd = C_GEN_W;
  logic [15:0] frow = '0;
  df_item_t item;
  int checks = 0, failures = 0;

  dataflow_generator #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // expected items of one command
  df_item_t exp_q [$];

  task automatic issue(input df_cmd_t c, input int fr);
    @(negedge clk);
    cmd_valid = 1; cmd = c; frow = 16'(fr);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic consume(input string what);
    int n;
    n = 0;
    while (exp_q.size() > 0) begin
      df_item_t e;
      item_ready = ($urandom % 3) != 0;
      #1;
      if (item_ready) begin
        e = exp_q.pop_front();
        check(item_valid && item == e,
              $sformatf("%s item %0d: got %h exp %h", what, n, item, e));
        check(done == (exp_q.size() == 0), $sformatf("%s done flag at item %0d", what, n));
        n++;
      end
      @(negedge clk);
    end
    item_ready = 0;
    check(cmd_ready, {what, ": back to idle"});
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int K, P, F;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int st = 1; st <= 2; st++) begin
      layer = '0;
      layer.kind = L_CONV; layer.ih = 5; layer.iw = 5; layer.ch = 2;
      layer.fr = 3; layer.fs = 3; layer.stride = 8'(st); layer.nfilt = 6;
      layer.oh = 16'((5 - 3) / st + 1); layer.ow = 16'((5 - 3) / st + 1);
      layer.ibase = 1000; layer.wbase = 5000; layer.obase = 9000;
      K = 18; P = int'(layer.oh) * int'(layer.ow); F = 6;
      issue(C_RST_PIX, 0);
      for (int fr = 0; fr < 2; fr++) begin
        for (int i = 0; i < N; i++)
          for (int t = 0; t < K; t++) begin
            df_item_t e;
            int f;
            f = fr * N + i;
            e.lane = 16'(i); e.sram_addr = 16'(t); e.dram_addr = 32'(5000 + f * K + t);
            e.zero = (f >= F);
            exp_q.push_back(e);
          end
        issue(C_GEN_W, fr);
        consume("GEN_W");
      end
      for (int pf = 0; pf * N < P; pf++) begin
        for (int j = 0; j < N; j++) begin
          int p, oy, ox;
          p = pf * N + j; oy = p / int'(layer.ow); ox = p % int'(layer.ow);
          for (int r = 0; r < 3; r++)
            for (int s = 0; s < 3; s++)
              for (int c = 0; c < 2; c++) begin
                df_item_t e;
                e.lane = 16'(j); e.sram_addr = 16'((r * 3 + s) * 2 + c);
                e.dram_addr = 32'(1000 + ((oy * st + r) * 5 + ox * st + s) * 2 + c);
                e.zero = (p >= P);
                exp_q.push_back(e);
              end
        end
        issue(C_GEN_I, 0);
        consume($sformatf("GEN_I fold %0d", pf));
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++) begin
            df_item_t e;
            int p, f;
            p = pf * N + j; f = N + i;      // filter fold 1
            e.lane = 16'(j); e.sram_addr = 16'(i); e.dram_addr = 32'(9000 + p * F + f);
            e.zero = (f >= F) || (p >= P);
            exp_q.push_back(e);
          end
        issue(C_GEN_O, 1);
        consume($sformatf("GEN_O fold %0d", pf));
        issue(C_ADV_PIX, 0);
      end
    end
    layer.nfilt = 10; layer.obase = 777;
    for (int k = 0; k < 10; k++) begin
      df_item_t e;
      e = '0; e.lane = 16'(k); e.dram_addr = 32'(777 + k);
      exp_q.push_back(e);
    end
    issue(C_GEN_ADC, 0);
    consume("GEN_ADC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
