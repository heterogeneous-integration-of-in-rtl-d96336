// dataflow_generator: address-trace generator for the output-stationary dataflow.
//
// A convolution is executed as the matrix product OFMap[f][p] = sum_t W[f][t] X[t][p]
// over tiles of N filters (array rows, fold index frow) x N output pixels (array
// columns, current pixel fold). t = (r, s, c) runs over the K = R*S*C positions of
// the filter window. In LPDDR, filters are stored [f][r][s][c], IFMaps and OFMaps
// channel-last (HWC); padding is assumed already applied to the stored IFMap.
//
// On a command the generator emits a stream of items {lane, sram_addr, dram_addr,
// zero} with a valid/ready handshake, then pulses done with the last one:
//   GEN_W   weight tile:  lane i, sram_addr t, dram wbase + f*K + t,   f = frow*N + i
//   GEN_I   IFMap tile:   lane j, sram_addr t,
//                         dram ibase + ((oy*stride + r)*IW + ox*stride + s)*C + c,
//                         (oy, ox) = pixel p = pbase + j
//   GEN_O   OFMap tile:   lane j, sram_addr i, dram obase + p*F + f
//   GEN_ADC ADC codes:    lane k, dram obase + k, k < nfilt
//   ADV_PIX move to the next pixel fold (pbase += N); RST_PIX back to pixel 0.
// zero marks an item outside the layer (f >= F or p >= P): a read item then writes
// 0.0 into the SRAM without an LPDDR access, a write item is skipped.
// Lane index (oy, ox) of a pixel is tracked by counters, so no divider is needed.
//
// Follows the paper: the dataflow generator produces LPDDR read traces for the
// IFMap and weight SRAMs and write traces for OFMaps and ADC results following the
// OS dataflow. The layouts, the tiling order and the item format are this design's.
module dataflow_generator
  import tpu_imac_pkg::*;
#(
  parameter int unsigned N = ARRAY_N
) (
  input  logic        clk,
  input  logic        rst_n,
  input  layer_desc_t layer,
  input  logic        cmd_valid,
  input  df_cmd_t     cmd,
  input  logic [15:0] frow,
  output logic        cmd_ready,
  output logic        item_valid,
  input  logic        item_ready,
  output df_item_t    item,
  output logic        done
);
  typedef enum logic [2:0] {S_IDLE, S_W, S_I, S_O, S_ADC} state_t;
  state_t state;

  logic [15:0] a, b;               // outer (lane or row) and second (lane) counter
  logic [15:0] r, s, c;            // filter window position
  logic [15:0] t;                  // linear window index
  logic [31:0] pbase;              // first pixel of the current fold
  logic [15:0] oy0, ox0;           // its coordinates
  logic [15:0] oy, ox;             // coordinates of pixel pbase + a during GEN_I
  logic [31:0] kdim, npix;
  logic        last_t, last_a;

  assign kdim   = 32'(layer.fr) * 32'(layer.fs) * 32'(layer.ch);
  assign npix   = 32'(layer.oh) * 32'(layer.ow);
  assign last_t = (32'(t) == kdim - 32'd1);

  always_comb begin
    logic [31:0] f, p;
    f = '0;
    p = '0;
    item = '0;
    done = 1'b0;
    last_a = 1'b0;
    item_valid = (state != S_IDLE);
    unique case (state)
      S_W: begin
        f = 32'(frow) * N + 32'(a);
        item.lane      = a;
        item.sram_addr = t;
        item.dram_addr = layer.wbase + f * kdim + 32'(t);
        item.zero      = (f >= 32'(layer.nfilt));
        last_a         = (a == 16'(N - 1));
        done           = item_ready && last_a && last_t;
      end
      S_I: begin
        p = pbase + 32'(a);
        item.lane      = a;
        item.sram_addr = t;
        item.dram_addr = layer.ibase +
                         ((32'(oy) * layer.stride + 32'(r)) * layer.iw +
                          32'(ox) * layer.stride + 32'(s)) * layer.ch + 32'(c);
        item.zero      = (p >= npix);
        last_a         = (a == 16'(N - 1));
        done           = item_ready && last_a && last_t;
      end
      S_O: begin
        f = 32'(frow) * N + 32'(a);
        p = pbase + 32'(b);
        item.lane      = b;
        item.sram_addr = a;
        item.dram_addr = layer.obase + p * 32'(layer.nfilt) + f;
        item.zero      = (f >= 32'(layer.nfilt)) || (p >= npix);
        last_a         = (a == 16'(N - 1));
        done           = item_ready && last_a && (b == 16'(N - 1));
      end
      S_ADC: begin
        item.lane      = a;
        item.dram_addr = layer.obase + 32'(a);
        last_a         = (a == layer.nfilt - 16'd1);
        done           = item_ready && last_a;
      end
      default: ;
    endcase
  end

  assign cmd_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {a, b, r, s, c, t} <= '0;
      pbase <= '0; oy0 <= '0; ox0 <= '0; oy <= '0; ox <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          {a, b, r, s, c, t} <= '0;
          oy <= oy0; ox <= ox0;
          unique case (cmd)
            C_GEN_W:   state <= S_W;
            C_GEN_I:   state <= S_I;
            C_GEN_O:   state <= S_O;
            C_GEN_ADC: state <= S_ADC;
            C_ADV_PIX: begin
              pbase <= pbase + N;
              // step (oy0, ox0) forward by N pixels
              if (32'(ox0) + N < 32'(layer.ow)) ox0 <= ox0 + 16'(N);
              else begin
                oy0 <= oy0 + 16'((32'(ox0) + N) / layer.ow);
                ox0 <= 16'((32'(ox0) + N) % layer.ow);
              end
            end
            C_RST_PIX: begin pbase <= '0; oy0 <= '0; ox0 <= '0; end
            default: ;
          endcase
        end
        S_W, S_I: if (item_ready) begin
          if (last_t) begin
            t <= '0; r <= '0; s <= '0; c <= '0;
            a <= a + 16'd1;
            if (state == S_I) begin
              if (ox == layer.ow - 16'd1) begin ox <= '0; oy <= oy + 16'd1; end
              else ox <= ox + 16'd1;
            end
            if (last_a) state <= S_IDLE;
          end else begin
            t <= t + 16'd1;
            if (c == layer.ch - 16'd1) begin
              c <= '0;
              if (s == 16'(layer.fs) - 16'd1) begin s <= '0; r <= r + 16'd1; end
              else s <= s + 16'd1;
            end else c <= c + 16'd1;
          end
        end
        S_O: if (item_ready) begin
          if (b == 16'(N - 1)) begin
            b <= '0; a <= a + 16'd1;
            if (last_a) state <= S_IDLE;
          end else b <= b + 16'd1;
        end
        S_ADC: if (item_ready) begin
          a <= a + 16'd1;
          if (last_a) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
