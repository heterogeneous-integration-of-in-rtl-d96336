// tb_imac: self-checking testbench of the IMAC network (two subarrays + switch blocks).
//
// Programs random ternary weights into both subarrays and routes binary inputs ->
// subarray 0 -> subarray 1 -> output. Applies random binary inputs (logic 1 = +1.0,
// logic 0 = -1.0) and checks after one clock (one FC layer: output switch on
// subarray 0) and after two clocks (two FC layers) against a reference network
// computed in the testbench with the piecewise-linear sigmoid.
module tb_imac;
  import tpu_imac_pkg::*;
  localparam int N = 16, NSUB = 2, SH = 2;
  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0, prog_en = 1'b0, cfg_we = 1'b0;
  logic [1:0] prog_sub = '0, cfg_sb = '0, cfg_src = '0;
  logic [3:0] prog_row = '0;
  logic [N-1:0][1:0] prog_w = '0;
  logic [N-1:0] din = '0;
  wire  [N-1:0] imac_in = din;
  volt_t [N-1:0] vout;
  int wt [NSUB][N][N];
  int h1 [N], h2 [N];
  int checks = 0, failures = 0;

  imac #(.N(N), .NSUB(NSUB), .AMP_SHIFT(SH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

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

  task automatic cfg(input int sb, input int src);
    @(negedge clk); cfg_we = 1; cfg_sb = 2'(sb); cfg_src = 2'(src);
    @(negedge clk); cfg_we = 0;
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
    cfg(0, 0);   // subarray 0 <- binary inputs
    cfg(1, 1);   // subarray 1 <- subarray 0
    for (int round = 0; round < 10; round++) begin
      @(negedge clk);
      for (int s = 0; s < NSUB; s++)
        for (int r = 0; r < N; r++) begin
          for (int i = 0; i < N; i++) begin
            int w;
            w = int'($urandom % 3) - 1;
            wt[s][r][i] = w;
            prog_w[i] = (w == 1) ? W_POS : (w == -1) ? W_NEG : W_ZERO;
          end
          prog_en = 1; prog_sub = 2'(s); prog_row = 4'(r);
          @(negedge clk);
        end
      prog_en = 0;
      din = 16'($urandom);
      for (int r = 0; r < N; r++) begin
        int a;
        a = 0;
        for (int i = 0; i < N; i++) a += wt[0][r][i] * (din[i] ? 256 : -256);
        h1[r] = plan_ref(a >>> SH);
      end
      for (int r = 0; r < N; r++) begin
        int a;
        a = 0;
        for (int i = 0; i < N; i++) a += wt[1][r][i] * h1[i];
        h2[r] = plan_ref(a >>> SH);
      end
      // one FC layer: observe subarray 0
      cfg(NSUB, 0);
      run = 1; @(negedge clk); run = 0;
      for (int r = 0; r < N; r++) check(int'(vout[r]) == h1[r], $sformatf("layer 1 row %0d", r));
      // two FC layers: observe subarray 1, two clocks of run
      cfg(NSUB, 1);
      run = 1; @(negedge clk);
      @(negedge clk); run = 0;
      for (int r = 0; r < N; r++)
        check(int'(vout[r]) == h2[r], $sformatf("layer 2 row %0d got %0d exp %0d", r, vout[r], h2[r]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
