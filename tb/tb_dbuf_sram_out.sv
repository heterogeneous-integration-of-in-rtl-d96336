// tb_dbuf_sram_out: self-checking testbench of the double-buffered OFMap SRAM.
//
// Writes whole rows into the fill bank, swaps, then reads every word back one at a
// time (one-cycle latency) while the next tile's rows are written into the other
// bank.
module tb_dbuf_sram_out;
  localparam int LANES = 4, ROWS = 4;
  logic clk = 1'b0, rst_n = 1'b0, swap = 1'b0, bank_sel;
  logic wr_en = 1'b0, rd_en = 1'b0, rd_valid;
  logic [1:0] wr_addr = '0, rd_addr = '0, rd_lane = '0;
  logic [LANES-1:0][31:0] wr_data = '0;
  logic [31:0] rd_data;
  logic [31:0] ref_mem [2][ROWS][LANES];
  int checks = 0, failures = 0;

  dbuf_sram_out #(.LANES(LANES), .ROWS(ROWS)) dut (.*);

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
    for (int r = 0; r < ROWS; r++) begin
      for (int l = 0; l < LANES; l++) begin ref_mem[0][r][l] = $urandom; wr_data[l] = ref_mem[0][r][l]; end
      wr_en = 1; wr_addr = 2'(r); @(negedge clk);
    end
    wr_en = 0;
    for (int tile = 0; tile < 5; tile++) begin
      int cur, nxt, wrow;
      cur = tile % 2; nxt = 1 - cur; wrow = 0;
      swap = 1; @(negedge clk); swap = 0;
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < LANES; l++) ref_mem[nxt][r][l] = $urandom;
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < LANES; l++) begin
          rd_en = 1; rd_addr = 2'(r); rd_lane = 2'(l);
          if (wrow < ROWS) begin
            wr_en = 1; wr_addr = 2'(wrow);
            for (int k = 0; k < LANES; k++) wr_data[k] = ref_mem[nxt][wrow][k];
            wrow++;
          end else wr_en = 0;
          @(negedge clk);
          rd_en = 0; wr_en = 0;
          check(rd_valid && rd_data == ref_mem[cur][r][l],
                $sformatf("tile %0d row %0d lane %0d got %h", tile, r, l, rd_data));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
