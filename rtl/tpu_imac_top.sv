// tpu_imac_top: heterogeneous TPU-IMAC accelerator for CNN inference.
//
// Convolutional layers run on an N x N output-stationary systolic array of FP32
// PEs fed from double-buffered weight and IFMap SRAMs; their OFMaps go through a
// double-buffered OFMap SRAM and the activation unit (ReLU) back to LPDDR. After the
// last convolutional layer its OFMaps stay in the PEs: the inverted sign bit of
// each of the N*N PEs drives one input of the IMAC through a tri-state buffer, the
// IMAC's memristive subarrays compute the FC layers (ternary weights, sigmoid
// neurons), one per clock, and an ADC digitises the result, which is written to
// LPDDR. A scheduler holds the network as a layer table; a dataflow generator makes
// the LPDDR address traces; the main controller sequences everything.
//
// External interfaces (all synchronous to clk, active-low asynchronous reset):
//   LPDDR port   mem_req/mem_we/mem_addr/mem_wdata -> mem_ack/mem_rdata, 32-bit
//                words, one access in flight (the LPDDR device itself is external);
//   layer table  tbl_we/tbl_addr/tbl_data, then start; busy, net_done, layers_run;
//   IMAC configuration phase: prog_* (one row of ternary weights per clock into one
//                subarray) and cfg_* (switch-block routing);
//   status       fc_cycles: IMAC clocks used by the last FC layer group.
//
// Follows the paper's block diagram (LPDDR, IFMap/weight/OFMap SRAMs, PE array,
// activation unit, IMAC with switch blocks, ADC, main controller, scheduler,
// dataflow generator) and its sizes: a 32 x 32 array, an IMAC input per PE (1024).
// The number of IMAC subarrays (2, enough for the 1024-1024-10/100 FC parts of the
// evaluated CNNs), the SRAM depths, the ADC resolution and all interface details
// are this design's choices.
module tpu_imac_top
  import tpu_imac_pkg::*;
#(
  parameter int unsigned N          = ARRAY_N,
  parameter int unsigned DEPTH      = 4608,
  parameter int unsigned NSUB       = 2,
  parameter int unsigned AMP_SHIFT  = 0,
  parameter int unsigned ADC_BITS   = 8,
  parameter int unsigned MAX_LAYERS = 32,
  localparam int unsigned NI   = N * N,
  localparam int unsigned RW   = $clog2(NI),
  localparam int unsigned SUBW = $clog2(NSUB + 1),
  localparam int unsigned TW   = $clog2(MAX_LAYERS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // LPDDR
  output logic                  mem_req,
  output logic                  mem_we,
  output logic [31:0]           mem_addr,
  output logic [31:0]           mem_wdata,
  input  logic                  mem_ack,
  input  logic [31:0]           mem_rdata,
  // scheduler programming and control
  input  logic                  tbl_we,
  input  logic [TW-1:0]         tbl_addr,
  input  layer_desc_t           tbl_data,
  input  logic                  start,
  output logic                  busy,
  output logic                  net_done,
  output logic [TW:0]           layers_run,
  // IMAC configuration phase
  input  logic                  prog_en,
  input  logic [SUBW-1:0]       prog_sub,
  input  logic [RW-1:0]         prog_row,
  input  logic [NI-1:0][1:0]    prog_w,
  input  logic                  cfg_we,
  input  logic [SUBW-1:0]       cfg_sb,
  input  logic [SUBW-1:0]       cfg_src,
  // status
  output logic [31:0]           fc_cycles
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(N);

  // scheduler <-> controller
  logic        req, layer_done;
  layer_desc_t layer;
  // generator
  logic        gen_cmd_valid, gen_cmd_ready, gen_item_valid, gen_item_ready, gen_done;
  df_cmd_t     gen_cmd;
  logic [15:0] gen_frow;
  df_item_t    gen_item;
  // input SRAMs
  logic            in_wr_w, in_wr_i, in_rd_en, in_swap, w_rd_valid, i_rd_valid;
  logic [LW-1:0]   in_wr_lane;
  logic [AW-1:0]   in_wr_addr, in_rd_addr;
  logic [31:0]     in_wr_data;
  logic [N-1:0][31:0] w_rows, x_cols;
  logic            w_bank, i_bank;
  // array
  logic            arr_clr, arr_shift, arr_busy;
  logic [N-1:0][N-1:0][31:0] acc;
  logic [N-1:0][31:0] drain_row;
  // OFMap SRAM
  logic            of_wr_en, of_swap, of_rd_en, of_rd_valid, of_bank;
  logic [LW-1:0]   of_wr_addr, of_rd_addr, of_rd_lane;
  logic [31:0]     of_rd_data;
  // activation
  logic            act_relu, act_in_valid, act_out_valid;
  logic [31:0]     act_in_data, act_out_data;
  // IMAC side
  logic            bridge_oe, imac_run, adc_convert, adc_done;
  wire  [NI-1:0]   imac_in;
  volt_t [NI-1:0]  imac_out;
  logic [RW-1:0]   adc_rd_ch;
  logic [ADC_BITS-1:0] adc_rd_code;

  scheduler #(.MAX_LAYERS(MAX_LAYERS)) u_sched (
    .clk, .rst_n, .tbl_we, .tbl_addr, .tbl_data, .start, .busy,
    .req, .layer, .layer_done, .net_done, .layers_run
  );

  dataflow_generator #(.N(N)) u_dfg (
    .clk, .rst_n, .layer,
    .cmd_valid(gen_cmd_valid), .cmd(gen_cmd), .frow(gen_frow), .cmd_ready(gen_cmd_ready),
    .item_valid(gen_item_valid), .item_ready(gen_item_ready), .item(gen_item), .done(gen_done)
  );

  main_controller #(.N(N), .DEPTH(DEPTH), .CH(NI), .BITS(ADC_BITS)) u_ctrl (
    .clk, .rst_n, .req, .layer, .layer_done,
    .gen_cmd_valid, .gen_cmd, .gen_frow, .gen_cmd_ready, .gen_item_valid, .gen_item_ready,
    .gen_item, .gen_done,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata,
    .in_wr_w, .in_wr_i, .in_wr_lane, .in_wr_addr, .in_wr_data, .in_rd_en, .in_rd_addr, .in_swap,
    .arr_clr, .arr_shift, .arr_busy,
    .of_wr_en, .of_wr_addr, .of_swap, .of_rd_en, .of_rd_addr, .of_rd_lane, .of_rd_valid, .of_rd_data,
    .act_relu, .act_in_valid, .act_in_data, .act_out_valid, .act_out_data,
    .bridge_oe, .imac_run, .adc_convert, .adc_done, .adc_rd_ch, .adc_rd_code,
    .fc_cycles
  );

  dbuf_sram_in #(.LANES(N), .DEPTH(DEPTH)) u_wsram (
    .clk, .rst_n, .swap(in_swap), .bank_sel(w_bank),
    .wr_en(in_wr_w), .wr_lane(in_wr_lane), .wr_addr(in_wr_addr), .wr_data(in_wr_data),
    .rd_en(in_rd_en), .rd_addr(in_rd_addr), .rd_valid(w_rd_valid), .rd_data(w_rows)
  );

  dbuf_sram_in #(.LANES(N), .DEPTH(DEPTH)) u_isram (
    .clk, .rst_n, .swap(in_swap), .bank_sel(i_bank),
    .wr_en(in_wr_i), .wr_lane(in_wr_lane), .wr_addr(in_wr_addr), .wr_data(in_wr_data),
    .rd_en(in_rd_en), .rd_addr(in_rd_addr), .rd_valid(i_rd_valid), .rd_data(x_cols)
  );

  systolic_array #(.N(N)) u_array (
    .clk, .rst_n, .clr(arr_clr), .shift(arr_shift), .v(w_rd_valid && i_rd_valid),
    .w_row(w_rows), .x_col(x_cols), .busy(arr_busy), .acc, .drain_row
  );

  dbuf_sram_out #(.LANES(N), .ROWS(N)) u_osram (
    .clk, .rst_n, .swap(of_swap), .bank_sel(of_bank),
    .wr_en(of_wr_en), .wr_addr(of_wr_addr), .wr_data(drain_row),
    .rd_en(of_rd_en), .rd_addr(of_rd_addr), .rd_lane(of_rd_lane),
    .rd_valid(of_rd_valid), .rd_data(of_rd_data)
  );

  activation_unit u_act (
    .clk, .rst_n, .relu_en(act_relu),
    .in_valid(act_in_valid), .in_data(act_in_data),
    .out_valid(act_out_valid), .out_data(act_out_data)
  );

  sign_bridge #(.N(N)) u_bridge (.oe(bridge_oe), .acc, .imac_in);

  imac #(.N(NI), .NSUB(NSUB), .AMP_SHIFT(AMP_SHIFT)) u_imac (
    .clk, .rst_n, .imac_in, .run(imac_run),
    .prog_en, .prog_sub, .prog_row, .prog_w, .cfg_we, .cfg_sb, .cfg_src,
    .vout(imac_out)
  );

  adc #(.CH(NI), .BITS(ADC_BITS)) u_adc (
    .clk, .rst_n, .vin(imac_out), .convert(adc_convert), .done(adc_done),
    .rd_ch(adc_rd_ch), .rd_code(adc_rd_code)
  );

  // the two input SRAMs always swap together
  assert property (@(posedge clk) disable iff (!rst_n) w_bank == i_bank);
endmodule
