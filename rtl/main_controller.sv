// main_controller: sequencer of the TPU-IMAC accelerator.
//
// It takes one layer at a time from the scheduler (req / layer / layer_done) and
// drives every enable of the datapath: LPDDR requests, the SRAM ports and bank
// swaps, the systolic array's clear / stream / drain, the activation unit, the
// tri-state enable of the sign bridge, the IMAC run signal and the ADC.
//
// Convolution layer (kind L_CONV), for each pixel fold and, inside it, each filter
// fold of N x N outputs:
//   LOAD   the dataflow generator's weight trace, then its IFMap trace, is played:
//          each item reads one word from LPDDR into the fill bank of the weight or
//          IFMap SRAM (items outside the layer write 0.0 without a read);
//   SWAP   both input SRAMs swap banks, the array accumulators are cleared;
//   STREAM K words (one per window position t) are read from both SRAMs and enter
//          the array, which skews them itself; then wait until the array is idle;
//   DRAIN  N cycles shift the OFMap rows out of the array into the OFMap SRAM,
//          which then swaps banks (skipped for a layer marked keep: its OFMaps stay
//          in the PEs for the IMAC);
//   WB     the OFMap write trace is played: each item reads one word from the OFMap
//          SRAM, passes it through the activation unit and writes it to LPDDR.
// FC layer group (kind L_FC): the tri-state buffers between the PEs and the IMAC
// are enabled and the IMAC runs for nfc clocks, one per FC layer; the ADC converts;
// the ADC write trace then stores one code per 32-bit LPDDR word.
//
// LPDDR port: mem_req stays high with mem_we/mem_addr/mem_wdata until mem_ack
// (one clock); for a read mem_rdata is valid with mem_ack. One access is in flight
// at a time.
//
// Follows the paper: the controller handles data transfer between LPDDR and the
// SRAMs at the scheduler's request, manages the enables of every component and the
// tri-state buffers between the array and the IMAC, and results reach LPDDR through
// the OFMap SRAM or from the ADC. Own choices: the whole state sequence above, one
// LPDDR access at a time, and that loading, computing and write-back of a tile do
// not overlap (the SRAMs' second banks are swapped every tile but not filled
// ahead).
module main_controller
  import tpu_imac_pkg::*;
#(
  parameter int unsigned N     = ARRAY_N,
  parameter int unsigned DEPTH = 4608,
  parameter int unsigned CH    = 1024,
  parameter int unsigned BITS  = 8,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned LW = $clog2(N),
  localparam int unsigned CW = $clog2(CH)
) (
  input  logic        clk,
  input  logic        rst_n,
  // scheduler
  input  logic        req,
  input  layer_desc_t layer,
  output logic        layer_done,
  // dataflow generator
  output logic        gen_cmd_valid,
  output df_cmd_t     gen_cmd,
  output logic [15:0] gen_frow,
  input  logic        gen_cmd_ready,
  input  logic        gen_item_valid,
  output logic        gen_item_ready,
  input  df_item_t    gen_item,
  input  logic        gen_done,
  // LPDDR
  output logic        mem_req,
  output logic        mem_we,
  output logic [31:0] mem_addr,
  output logic [31:0] mem_wdata,
  input  logic        mem_ack,
  input  logic [31:0] mem_rdata,
  // weight and IFMap SRAMs
  output logic        in_wr_w,
  output logic        in_wr_i,
  output logic [LW-1:0] in_wr_lane,
  output logic [AW-1:0] in_wr_addr,
  output logic [31:0] in_wr_data,
  output logic        in_rd_en,
  output logic [AW-1:0] in_rd_addr,
  output logic        in_swap,
  // systolic array
  output logic        arr_clr,
  output logic        arr_shift,
  input  logic        arr_busy,
  // OFMap SRAM
  output logic        of_wr_en,
  output logic [LW-1:0] of_wr_addr,
  output logic        of_swap,
  output logic        of_rd_en,
  output logic [LW-1:0] of_rd_addr,
  output logic [LW-1:0] of_rd_lane,
  input  logic        of_rd_valid,
  input  logic [31:0] of_rd_data,
  // activation unit
  output logic        act_relu,
  output logic        act_in_valid,
  output logic [31:0] act_in_data,
  input  logic        act_out_valid,
  input  logic [31:0] act_out_data,
  // IMAC side
  output logic        bridge_oe,
  output logic        imac_run,
  output logic        adc_convert,
  input  logic        adc_done,
  output logic [CW-1:0] adc_rd_ch,
  input  logic [BITS-1:0] adc_rd_code,
  // status
  output logic [31:0] fc_cycles       // IMAC clocks spent by the last FC layer group
);
  typedef enum logic [4:0] {
    S_IDLE, S_CONV_INIT, S_CMD_W, S_CMD_I, S_LD_ITEM, S_LD_MEM,
    S_SWAP, S_STREAM, S_WAIT_ARR, S_DRAIN, S_CMD_O, S_WB_ITEM, S_WB_RD, S_WB_ACT,
    S_WB_MEM, S_NEXT, S_FC_RUN, S_FC_ADC, S_CMD_ADC, S_ADC_ITEM, S_ADC_MEM, S_DONE
  } state_t;
  state_t state, after_ld;

  logic        ld_is_w;             // current load trace fills the weight SRAM
  logic [31:0] kdim, npix, nfp, nff;
  logic [31:0] cnt;
  logic [15:0] frow, pfold;
  logic [31:0] wb_data;

  assign kdim = 32'(layer.fr) * 32'(layer.fs) * 32'(layer.ch);
  assign npix = 32'(layer.oh) * 32'(layer.ow);
  assign nfp  = (npix + N - 1) / N;
  assign nff  = (32'(layer.nfilt) + N - 1) / N;
  assign gen_frow = frow;
  assign act_relu = layer.relu;

  // S_NEXT moving to the next pixel fold tells the generator in the same cycle
  logic adv_pix;
  assign adv_pix = (state == S_NEXT) && !(32'(frow) + 32'd1 < nff) && (32'(pfold) + 32'd1 < nfp);

  // ---------------------------------------------------------------- outputs
  always_comb begin
    layer_done = 1'b0;
    gen_cmd_valid = 1'b0; gen_cmd = C_GEN_W; gen_item_ready = 1'b0;
    mem_req = 1'b0; mem_we = 1'b0; mem_addr = gen_item.dram_addr; mem_wdata = wb_data;
    in_wr_w = 1'b0; in_wr_i = 1'b0;
    in_wr_lane = gen_item.lane[LW-1:0]; in_wr_addr = gen_item.sram_addr[AW-1:0];
    in_wr_data = gen_item.zero ? 32'd0 : mem_rdata;
    in_rd_en = 1'b0; in_rd_addr = cnt[AW-1:0]; in_swap = 1'b0;
    arr_clr = 1'b0; arr_shift = 1'b0;
    of_wr_en = 1'b0; of_wr_addr = LW'(N - 1) - cnt[LW-1:0]; of_swap = 1'b0;
    of_rd_en = 1'b0; of_rd_addr = gen_item.sram_addr[LW-1:0]; of_rd_lane = gen_item.lane[LW-1:0];
    act_in_valid = of_rd_valid; act_in_data = of_rd_data;
    bridge_oe = 1'b0; imac_run = 1'b0; adc_convert = 1'b0;
    adc_rd_ch = gen_item.lane[CW-1:0];
    unique case (state)
      S_CONV_INIT: begin gen_cmd_valid = 1'b1; gen_cmd = C_RST_PIX; end
      S_CMD_W:     begin gen_cmd_valid = 1'b1; gen_cmd = C_GEN_W; end
      S_CMD_I:     begin gen_cmd_valid = 1'b1; gen_cmd = C_GEN_I; end
      S_CMD_O:     begin gen_cmd_valid = 1'b1; gen_cmd = C_GEN_O; end
      S_CMD_ADC:   begin gen_cmd_valid = 1'b1; gen_cmd = C_GEN_ADC; end
      S_LD_ITEM: if (gen_item_valid && gen_item.zero) begin
        gen_item_ready = 1'b1;
        in_wr_w = ld_is_w; in_wr_i = !ld_is_w;
      end
      S_LD_MEM: begin
        mem_req = 1'b1;
        if (mem_ack) begin
          gen_item_ready = 1'b1;
          in_wr_w = ld_is_w; in_wr_i = !ld_is_w;
        end
      end
      S_SWAP:   begin in_swap = 1'b1; arr_clr = 1'b1; end
      S_STREAM: in_rd_en = 1'b1;
      S_DRAIN:  begin
        arr_shift = 1'b1; of_wr_en = 1'b1;
        of_swap   = (cnt == 32'(N - 1));   // last row written: hand the tile to write-back
      end
      S_NEXT: if (adv_pix) begin gen_cmd_valid = 1'b1; gen_cmd = C_ADV_PIX; end
      S_WB_ITEM: if (gen_item_valid) begin
        if (gen_item.zero) gen_item_ready = 1'b1;
        else               of_rd_en = 1'b1;
      end
      S_WB_MEM: begin
        mem_req = 1'b1; mem_we = 1'b1;
        gen_item_ready = mem_ack;
      end
      S_FC_RUN: begin bridge_oe = 1'b1; imac_run = 1'b1; end
      S_FC_ADC: adc_convert = (cnt == 32'd0);
      S_ADC_MEM: begin
        mem_req = 1'b1; mem_we = 1'b1;
        mem_wdata = 32'(adc_rd_code);
        gen_item_ready = mem_ack;
      end
      S_DONE: layer_done = 1'b1;
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- sequence
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; after_ld <= S_IDLE;
      ld_is_w <= 1'b0; cnt <= '0; frow <= '0; pfold <= '0;
      wb_data <= '0; fc_cycles <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req) begin
          cnt <= '0;
          if (layer.kind == L_FC) begin
            state <= S_FC_RUN;
            fc_cycles <= '0;
          end else state <= S_CONV_INIT;
        end
        S_CONV_INIT: if (gen_cmd_ready) begin
          frow <= '0; pfold <= '0;
          state <= S_CMD_W;
        end
        S_CMD_W: if (gen_cmd_ready) begin
          ld_is_w <= 1'b1; after_ld <= S_CMD_I; state <= S_LD_ITEM;
        end
        S_CMD_I: if (gen_cmd_ready) begin
          ld_is_w <= 1'b0; after_ld <= S_SWAP; state <= S_LD_ITEM;
        end
        S_LD_ITEM: if (gen_item_valid) begin
          if (gen_item.zero) begin
            if (gen_done) state <= after_ld;
          end else state <= S_LD_MEM;
        end
        S_LD_MEM: if (mem_ack) state <= gen_done ? after_ld : S_LD_ITEM;
        S_SWAP: begin cnt <= '0; state <= S_STREAM; end
        S_STREAM: begin
          if (cnt == kdim - 32'd1) begin cnt <= '0; state <= S_WAIT_ARR; end
          else cnt <= cnt + 32'd1;
        end
        S_WAIT_ARR: if (!arr_busy) begin
          cnt <= '0;
          if (layer.keep) state <= S_DONE;
          else state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (cnt == 32'(N - 1)) begin cnt <= '0; state <= S_CMD_O; end
          else cnt <= cnt + 32'd1;
        end
        S_CMD_O: if (gen_cmd_ready) state <= S_WB_ITEM;
        S_WB_ITEM: if (gen_item_valid) begin
          if (gen_item.zero) begin
            if (gen_done) state <= S_NEXT;
          end else state <= S_WB_RD;
        end
        S_WB_RD:  if (act_out_valid) begin wb_data <= act_out_data; state <= S_WB_MEM; end
        S_WB_MEM: if (mem_ack) state <= gen_done ? S_NEXT : S_WB_ITEM;
        S_NEXT: begin
          if (32'(frow) + 32'd1 < nff) begin
            frow <= frow + 16'd1; state <= S_CMD_W;
          end else if (32'(pfold) + 32'd1 < nfp) begin
            if (gen_cmd_ready) begin
              frow <= '0; pfold <= pfold + 16'd1; state <= S_CMD_W;
            end
          end else state <= S_DONE;
        end
        S_FC_RUN: begin
          fc_cycles <= fc_cycles + 32'd1;
          if (cnt == 32'(layer.nfc) - 32'd1) begin cnt <= '0; state <= S_FC_ADC; end
          else cnt <= cnt + 32'd1;
        end
        S_FC_ADC: begin
          cnt <= cnt + 32'd1;
          if (adc_done) state <= S_CMD_ADC;
        end
        S_CMD_ADC: if (gen_cmd_ready) state <= S_ADC_MEM;
        S_ADC_MEM: if (mem_ack && gen_done) state <= S_DONE;
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // a layer is only started when the scheduler requests one
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_IDLE && !req) |=> state == S_IDLE);
endmodule
