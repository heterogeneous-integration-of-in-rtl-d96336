// dbuf_sram_in: double-buffered operand SRAM feeding one edge of the systolic array
// (used twice: as the IFMap SRAM on the top edge and as the weight SRAM on the left
// edge).
//
// Two banks, each LANES lanes wide and DEPTH words deep, 32-bit words. At any time
// one bank is the fill bank and the other the compute bank; swap exchanges them
// (bank_sel names the compute bank). The fill port writes one word per cycle
// (wr_lane, wr_addr) into the fill bank, as words arrive one at a time from LPDDR.
// The read port returns a whole LANES-wide word of the compute bank, one lane per
// array row or column, one cycle after rd_en (rd_valid marks it). Filling one bank
// while the array reads the other is what double buffering means here.
//
// Follows the paper: "IFMap SRAM / Weight SRAM (double buffered)". Own choices: the
// organisation in lanes, the depth (enough for a 3x3x512 filter window), one word
// written per cycle, one-cycle read latency.
module dbuf_sram_in #(
  parameter int unsigned LANES = 32,
  parameter int unsigned DEPTH = 4608,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  swap,
  output logic                  bank_sel,
  input  logic                  wr_en,
  input  logic [LW-1:0]         wr_lane,
  input  logic [AW-1:0]         wr_addr,
  input  logic [31:0]           wr_data,
  input  logic                  rd_en,
  input  logic [AW-1:0]         rd_addr,
  output logic                  rd_valid,
  output logic [LANES-1:0][31:0] rd_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_sel <= 1'b0;
      rd_valid <= 1'b0;
    end else begin
      if (swap) bank_sel <= ~bank_sel;
      rd_valid <= rd_en;
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [31:0] mem [2*DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_lane == LW'(l)) mem[{~bank_sel, wr_addr}] <= wr_data;
      if (rd_en) rd_data[l] <= mem[{bank_sel, rd_addr}];
    end
  end
endmodule
