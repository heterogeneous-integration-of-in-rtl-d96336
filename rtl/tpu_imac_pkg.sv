// tpu_imac_pkg: types, constants and arithmetic shared by the TPU-IMAC blocks.
//
// The systolic array of this accelerator computes in IEEE-754 single precision
// (FP32), as the TPU side of the architecture is specified to. The two functions
// fp32_mul and fp32_add below are the arithmetic of one processing element. They
// round to nearest, ties to even, and treat subnormal operands and results as zero
// (flush-to-zero); infinities and NaNs propagate. Subnormal handling is a choice of
// this implementation, not part of the architecture.
//
// The IMAC side is analog. Its behavioural models carry a node voltage as a signed
// fixed-point number with VFRAC fraction bits, so that +1.0 (one full input swing)
// is 2**VFRAC. This encoding is a modelling convention only.
//
// layer_desc_t is one entry of the scheduler's layer table (see scheduler.sv).
package tpu_imac_pkg;

  localparam int unsigned ARRAY_N = 32;   // systolic array is ARRAY_N x ARRAY_N
  localparam int unsigned VFRAC   = 8;    // fraction bits of a modelled analog voltage
  localparam int unsigned VW      = 24;   // width of a modelled analog voltage

  typedef logic signed [VW-1:0] volt_t;

  // Ternary synapse encoding used on the IMAC programming port.
  typedef enum logic [1:0] {
    W_ZERO = 2'b00,
    W_POS  = 2'b01,
    W_NEG  = 2'b11
  } tern_t;

  typedef enum logic [1:0] {
    L_CONV = 2'b00,   // convolution executed on the systolic array
    L_FC   = 2'b01,   // group of consecutive FC layers executed on the IMAC
    L_END  = 2'b11    // end of the network
  } layer_kind_t;

  // One layer of the CNN topology. A convolution is executed as the matrix
  // product OFMap[f][p] = sum_t W[f][t] * X[t][p] with t = (r, s, c) running over
  // the filter window and p = (oy, ox) over the output pixels.
  typedef struct packed {
    layer_kind_t kind;
    logic [15:0] ih, iw;      // IFMap height and width (already padded)
    logic [15:0] ch;          // input channels
    logic [7:0]  fr, fs;      // filter height and width
    logic [7:0]  stride;
    logic [15:0] nfilt;       // filters = output channels (FC: outputs read by the ADC)
    logic [15:0] oh, ow;      // OFMap height and width
    logic        relu;        // apply ReLU on write-back
    logic        keep;        // last conv before the FC part: keep OFMaps in the PEs
    logic [3:0]  nfc;         // FC: number of consecutive FC layers on the IMAC
    logic [31:0] ibase;       // LPDDR word address of the IFMap (HWC order)
    logic [31:0] wbase;       // LPDDR word address of the filters ([f][r][s][c] order)
    logic [31:0] obase;       // LPDDR word address of the OFMap (HWC order) / ADC codes
  } layer_desc_t;

  // Commands of the dataflow generator (see dataflow_generator.sv).
  typedef enum logic [2:0] {
    C_GEN_W   = 3'd0,   // weight tile read trace
    C_GEN_I   = 3'd1,   // IFMap tile read trace
    C_GEN_O   = 3'd2,   // OFMap tile write trace
    C_GEN_ADC = 3'd3,   // ADC result write trace
    C_ADV_PIX = 3'd4,   // advance to the next pixel fold
    C_RST_PIX = 3'd5    // back to the first pixel fold
  } df_cmd_t;

  // One item of an address trace.
  typedef struct packed {
    logic [15:0] lane;        // SRAM lane (array row or column) or ADC channel
    logic [15:0] sram_addr;   // SRAM word address (window index t or array row)
    logic [31:0] dram_addr;   // LPDDR word address
    logic        zero;        // outside the layer: fill with 0.0 / skip the write
  } df_item_t;

  // ---------------------------------------------------------------- FP32
  function automatic logic [31:0] fp32_pack_round(input logic s, input logic signed [11:0] e,
                                                  input logic [22:0] m, input logic g,
                                                  input logic st);
    logic [23:0] mr;
    logic signed [11:0] er;
    mr = {1'b0, m};
    er = e;
    if (g && (st || m[0])) mr = mr + 24'd1;
    if (mr[23]) begin
      er = er + 12'sd1;
      mr = 24'd0;
    end
    if (er >= 12'sd255)    return {s, 8'hFF, 23'd0};
    else if (er <= 12'sd0) return {s, 31'd0};
    else                   return {s, er[7:0], mr[22:0]};
  endfunction

  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [47:0] p;
    logic signed [11:0] e;
    logic a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
    s      = a[31] ^ b[31];
    a_nan  = (a[30:23] == 8'hFF) && (a[22:0] != 0);
    b_nan  = (b[30:23] == 8'hFF) && (b[22:0] != 0);
    a_inf  = (a[30:23] == 8'hFF) && (a[22:0] == 0);
    b_inf  = (b[30:23] == 8'hFF) && (b[22:0] == 0);
    a_zero = (a[30:23] == 8'h00);
    b_zero = (b[30:23] == 8'h00);
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) return 32'h7FC0_0000;
    if (a_inf || b_inf) return {s, 8'hFF, 23'd0};
    if (a_zero || b_zero) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = $signed({4'd0, a[30:23]}) + $signed({4'd0, b[30:23]}) - 12'sd127;
    if (p[47]) return fp32_pack_round(s, e + 12'sd1, p[46:24], p[23], |p[22:0]);
    else       return fp32_pack_round(s, e,          p[45:23], p[22], |p[21:0]);
  endfunction

  function automatic logic [31:0] fp32_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [26:0] mx, my;
    logic [27:0] sum;
    logic [7:0]  d;
    logic signed [11:0] e;
    logic a_nan, b_nan, a_inf, b_inf;
    int unsigned lz;
    a_nan = (a[30:23] == 8'hFF) && (a[22:0] != 0);
    b_nan = (b[30:23] == 8'hFF) && (b[22:0] != 0);
    a_inf = (a[30:23] == 8'hFF) && (a[22:0] == 0);
    b_inf = (b[30:23] == 8'hFF) && (b[22:0] == 0);
    if (a_nan || b_nan || (a_inf && b_inf && (a[31] != b[31]))) return 32'h7FC0_0000;
    if (a_inf) return a;
    if (b_inf) return b;
    if (a[30:23] == 8'h00 && b[30:23] == 8'h00) return {a[31] & b[31], 31'd0};
    if (a[30:23] == 8'h00) return b;
    if (b[30:23] == 8'h00) return a;
    // x is the operand of larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d >= 8'd27) my = 27'd1;                       // only the sticky bit survives
    else if (d != 8'd0) my = (my >> d) | {26'd0, |(my & ((27'd1 << d) - 27'd1))};
    e = $signed({4'd0, x[30:23]});
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e   = e + 12'sd1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 28'd0) return 32'd0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e   = e - 12'(lz);
    end
    return fp32_pack_round(x[31], e, sum[25:3], sum[2], |sum[1:0]);
  endfunction

  function automatic logic [31:0] fp32_mac(input logic [31:0] acc, input logic [31:0] a,
                                           input logic [31:0] b);
    return fp32_add(acc, fp32_mul(a, b));
  endfunction

  // Sigmoid of a modelled voltage, piecewise-linear (PLAN: slopes 1/4, 1/8, 1/32 with
  // breakpoints 1, 2.375, 5). Result in [0, 1.0] in the same fixed-point format.
  function automatic volt_t sigmoid_plan(input volt_t v);
    volt_t ax, y;
    localparam volt_t ONE = volt_t'(1) <<< VFRAC;
    ax = (v < 0) ? -v : v;
    if (ax >= 5 * ONE)                      y = ONE;
    else if (ax >= (19 * ONE) / 8)          y = (ax >>> 5) + (27 * ONE) / 32;
    else if (ax >= ONE)                     y = (ax >>> 3) + (5 * ONE) / 8;
    else                                    y = (ax >>> 2) + ONE / 2;
    return (v < 0) ? ONE - y : y;
  endfunction

endpackage
