// tb_systolic_array: self-checking testbench of the output-stationary array.
//
// For several random tiles (N = 8 here, K random) it presents row t of the weight
// tile and row t of the IFMap tile in the same cycle, waits for busy to fall, and
// compares every accumulator with the reference sum over t of W[i][t]*X[t][j],
// accumulated in the same order with the FP32 reference MAC. It checks that busy
// falls 2N-1 cycles after the last input (the skew plus the propagation across the
// array), then drains the array and checks that rows leave bottom row first.
module tb_systolic_array;
  import tb_fp_pkg::*;
  localparam int N = 8;
  localparam int KMAX = 40;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, shift = 1'b0, v = 1'b0, busy;
  logic [N-1:0][31:0] w_row = '0, x_col = '0, drain_row;
  logic [N-1:0][N-1:0][31:0] acc;
  logic [31:0] W [N][KMAX];
  logic [31:0] X [KMAX][N];
  logic [31:0] ref_acc [N][N];
  int checks = 0, failures = 0;

  systolic_array #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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
    for (int tile = 0; tile < 6; tile++) begin
      int K, lat;
      K = 1 + ($urandom % KMAX);
      for (int i = 0; i < N; i++)
        for (int t = 0; t < K; t++) begin W[i][t] = rand_f(); X[t][i] = rand_f(); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          ref_acc[i][j] = '0;
          for (int t = 0; t < K; t++) ref_acc[i][j] = ref_mac(ref_acc[i][j], W[i][t], X[t][j]);
        end
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int t = 0; t < K; t++) begin
        v = 1;
        for (int k = 0; k < N; k++) begin w_row[k] = W[k][t]; x_col[k] = X[t][k]; end
        @(negedge clk);
      end
      v = 0;
      lat = 0;
      while (busy) begin @(negedge clk); lat++; end
      check(lat == 2 * N - 1, $sformatf("busy latency %0d", lat));
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          check(acc[i][j] == ref_acc[i][j],
                $sformatf("tile %0d K %0d acc[%0d][%0d] %h exp %h", tile, K, i, j, acc[i][j], ref_acc[i][j]));
      // drain
      for (int r = N - 1; r >= 0; r--) begin
        for (int j = 0; j < N; j++) check(drain_row[j] == ref_acc[r][j], $sformatf("drain row %0d", r));
        shift = 1; @(negedge clk);
      end
      shift = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
