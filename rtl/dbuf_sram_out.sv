// dbuf_sram_out: double-buffered OFMap SRAM between the systolic array and LPDDR.
//
// Two banks of ROWS x LANES 32-bit words. The array drains one row of OFMaps per
// cycle into the fill bank (wr_en, wr_addr = array row, wr_data = all LANES
// columns). swap exchanges the banks (bank_sel names the read bank). The read port
// returns one word (rd_addr = row, rd_lane = column) of the read bank one cycle after
// rd_en, for write-back to LPDDR one word at a time. While one tile is written back
// from one bank, the next tile can be drained into the other.
//
// Follows the paper: "OFMap SRAM (double buffered)" between the PEs and LPDDR. Own
// choices: the size of one array tile per bank, row-wide writes, word reads, one-cycle
// read latency.
module dbuf_sram_out #(
  parameter int unsigned LANES = 32,
  parameter int unsigned ROWS  = 32,
  localparam int unsigned AW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   swap,
  output logic                   bank_sel,
  input  logic                   wr_en,
  input  logic [AW-1:0]          wr_addr,
  input  logic [LANES-1:0][31:0] wr_data,
  input  logic                   rd_en,
  input  logic [AW-1:0]          rd_addr,
  input  logic [LW-1:0]          rd_lane,
  output logic                   rd_valid,
  output logic [31:0]            rd_data
);
  logic [LANES-1:0][31:0] rdw;
  logic [LW-1:0]          lane_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_sel <= 1'b0;
      rd_valid <= 1'b0;
      lane_q   <= '0;
    end else begin
      if (swap) bank_sel <= ~bank_sel;
      rd_valid <= rd_en;
      if (rd_en) lane_q <= rd_lane;
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [31:0] mem [2*ROWS];
    always_ff @(posedge clk) begin
      if (wr_en) mem[{~bank_sel, wr_addr}] <= wr_data[l];
      if (rd_en) rdw[l] <= mem[{bank_sel, rd_addr}];
    end
  end

  assign rd_data = rdw[lane_q];
endmodule
