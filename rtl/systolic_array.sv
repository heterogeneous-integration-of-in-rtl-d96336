// systolic_array: N x N output-stationary systolic array of FP32 PEs.
//
// Row i of weights enters at the left edge (w_row[i]) and column j of IFMap values
// at the top edge (x_col[j]). The caller presents all N lanes of one reduction step
// t in the same cycle (one SRAM word per edge, v high); the array itself skews them
// with input delay lines, lane k delayed k cycles, so that W[i][t] and X[t][j] meet
// in PE(i,j) after i+j cycles: the diagonal wavefront of a systolic array. After the
// last of K steps is presented, PE(N-1,N-1) has its final sum 2N-1 cycles later
// (busy stays high until then).
//
// Every PE's accumulator is visible on acc (acc[i][j]: filter row i, pixel column
// j); the sign bits of these are what the IMAC bridge uses. Drain: while shift is
// high every column shifts down by one row per cycle; the bottom row appears on
// drain_row (row N-1 first, then N-2, ...).
//
// Follows the paper: OS dataflow, weights from the left, IFMap from the top, the
// PE grid of its Fig. 2(a), 32 x 32 size. Own choices: the input skew registers
// inside the array and the shift drain.
module systolic_array
  import tpu_imac_pkg::*;
#(
  parameter int unsigned N = ARRAY_N
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             shift,
  input  logic             v,
  input  logic [N-1:0][31:0] w_row,
  input  logic [N-1:0][31:0] x_col,
  output logic             busy,
  output logic [N-1:0][N-1:0][31:0] acc,
  output logic [N-1:0][31:0] drain_row
);
  // skewed edge inputs
  logic [N-1:0][31:0] w_sk, x_sk;
  logic [N-1:0]       wv_sk, xv_sk;

  for (genvar k = 0; k < N; k++) begin : g_skew
    if (k == 0) begin : g_d0
      assign w_sk[k] = w_row[k]; assign wv_sk[k] = v;
      assign x_sk[k] = x_col[k]; assign xv_sk[k] = v;
    end else begin : g_dk
      logic [k-1:0][31:0] wd, xd;
      logic [k-1:0]       vd;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          wd <= '0; xd <= '0; vd <= '0;
        end else begin
          wd[0] <= w_row[k]; xd[0] <= x_col[k]; vd[0] <= v;
          for (int s = 1; s < k; s++) begin
            wd[s] <= wd[s-1]; xd[s] <= xd[s-1]; vd[s] <= vd[s-1];
          end
        end
      end
      assign w_sk[k] = wd[k-1]; assign wv_sk[k] = vd[k-1];
      assign x_sk[k] = xd[k-1]; assign xv_sk[k] = vd[k-1];
    end
  end

  // PE grid wiring
  logic [N-1:0][N:0][31:0] wh;   // wh[i][j] enters PE(i,j) from the left
  logic [N-1:0][N:0]       wvh;
  logic [N:0][N-1:0][31:0] xv;   // xv[i][j] enters PE(i,j) from above
  logic [N:0][N-1:0]       xvv;

  for (genvar i = 0; i < N; i++) begin : g_row
    assign wh[i][0] = w_sk[i]; assign wvh[i][0] = wv_sk[i];
  end
  for (genvar j = 0; j < N; j++) begin : g_col
    assign xv[0][j] = x_sk[j]; assign xvv[0][j] = xv_sk[j];
  end

  for (genvar i = 0; i < N; i++) begin : g_r
    for (genvar j = 0; j < N; j++) begin : g_c
      pe u_pe (
        .clk, .rst_n, .clr, .shift,
        .w_in (wh[i][j]),   .w_vin (wvh[i][j]),
        .x_in (xv[i][j]),   .x_vin (xvv[i][j]),
        .acc_in (i == 0 ? 32'd0 : acc[(i == 0) ? 0 : i-1][j]),
        .w_out(wh[i][j+1]), .w_vout(wvh[i][j+1]),
        .x_out(xv[i+1][j]), .x_vout(xvv[i+1][j]),
        .acc_out(acc[i][j])
      );
    end
  end

  assign drain_row = acc[N-1];

  // busy while any operand is still travelling through the array
  always_comb begin
    busy = v;
    for (int k = 0; k < N; k++) busy |= wv_sk[k] | xv_sk[k];
    for (int i = 0; i < N; i++) busy |= |wvh[i][N:1];
  end
endmodule
