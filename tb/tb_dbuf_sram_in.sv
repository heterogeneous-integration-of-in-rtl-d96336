// tb_dbuf_sram_in: self-checking testbench of the double-buffered operand SRAM.
//
// Fills the fill bank word by word with random data, swaps, and while reading the
// compute bank row by row (one-cycle latency, checked) fills the other bank with new
// data, which must not disturb what is being read. Repeats over several swaps.
module tb_dbuf_sram_in;
  localparam int LANES = 4, DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0, swap = 1'b0, bank_sel;
  logic wr_en = 1'b0, rd_en = 1'b0, rd_valid;
  logic [1:0] wr_lane = '0;
  logic [3:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0;
  logic [LANES-1:0][31:0] rd_data;
  logic [31:0] ref_mem [2][LANES][DEPTH];   // [tile parity]
  int checks = 0, failures = 0;

  dbuf_sram_in #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

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
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(bank_sel == 1'b0, "reset bank");
    // fill tile 0
    for (int l = 0; l < LANES; l++)
      for (int a = 0; a < DEPTH; a++) begin
        ref_mem[0][l][a] = $urandom;
        wr_en = 1; wr_lane = 2'(l); wr_addr = 4'(a); wr_data = ref_mem[0][l][a];
        @(negedge clk);
      end
    wr_en = 0;
    for (int tile = 0; tile < 5; tile++) begin
      int cur, nxt;
      cur = tile % 2; nxt = 1 - cur;
      swap = 1; @(negedge clk); swap = 0;
      check(bank_sel == 1'(tile % 2 == 0), "bank toggles");
      for (int l = 0; l < LANES; l++)
        for (int a = 0; a < DEPTH; a++) ref_mem[nxt][l][a] = $urandom;
      // read the compute bank while writing the fill bank
      for (int a = 0; a < DEPTH; a++) begin
        rd_en = 1; rd_addr = 4'(a);
        for (int l = 0; l < LANES; l++) begin
          wr_en = 1; wr_lane = 2'(l); wr_addr = 4'(a); wr_data = ref_mem[nxt][l][a];
          @(negedge clk);
          rd_en = 0;
          if (l == 0) begin
            check(rd_valid, "rd_valid one cycle after rd_en");
            for (int k = 0; k < LANES; k++)
              check(rd_data[k] == ref_mem[cur][k][a],
                    $sformatf("tile %0d addr %0d lane %0d", tile, a, k));
          end
        end
      end
      wr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
