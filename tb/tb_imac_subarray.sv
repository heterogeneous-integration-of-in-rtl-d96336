// tb_imac_subarray: self-checking testbench of the IMAC subarray model.
//
// Programs random ternary weights row by row, applies random input voltages (binary
// +-1.0 and arbitrary levels), runs one clock and compares every output with a
// reference: the integer dot product of weights and inputs, scaled by the amplifier
// gain, through the piecewise-linear sigmoid worked out here in real arithmetic.
// Also checks that outputs hold while run is low and that results appear exactly
// one clock after run (one FC layer per clock).
module tb_imac_subarray;
  import tpu_imac_pkg::*;
  localparam int NIN = 16, NOUT = 8, SH = 2;
  logic clk = 1'b0, rst_n = 1'b0, prog_en = 1'b0, run = 1'b0;
  logic [2:0] prog_row = '0;
  logic [NIN-1:0][1:0] prog_w = '0;
  volt_t [NIN-1:0] vin = '0;
  volt_t [NOUT-1:0] vout, held;
  int wt [NOUT][NIN];
  int checks = 0, failures = 0;

  imac_subarray #(.NIN(NIN), .NOUT(NOUT), .AMP_SHIFT(SH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic int plan_ref(input int v);   // v in 1/256 units
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

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 20; round++) begin
      @(negedge clk);
      for (int r = 0; r < NOUT; r++) begin
        for (int i = 0; i < NIN; i++) begin
          int w;
          w = int'($urandom % 3) - 1;
          wt[r][i] = w;
          prog_w[i] = (w == 1) ? W_POS : (w == -1) ? W_NEG : W_ZERO;
        end
        prog_en = 1; prog_row = 3'(r);
        @(negedge clk);
      end
      prog_en = 0;
      for (int i = 0; i < NIN; i++)
        vin[i] = (round % 2 == 0) ? (($urandom % 2) ? volt_t'(256) : -volt_t'(256))
                                  : volt_t'($urandom % 257);
      run = 1;
      @(negedge clk);
      run = 0;
      for (int r = 0; r < NOUT; r++) begin
        int s;
        s = 0;
        for (int i = 0; i < NIN; i++) s += wt[r][i] * int'(vin[i]);
        s = s >>> SH;
        check(int'(vout[r]) == plan_ref(s), $sformatf("round %0d row %0d got %0d exp %0d",
                                                      round, r, vout[r], plan_ref(s)));
      end
      held = vout;
      vin = '0;
      @(negedge clk);
      check(vout == held, "outputs hold while run is low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
