// imac: behavioural model of the in-memory analog computing (IMAC) unit, a network
// of NSUB subarrays joined by switch blocks.
//
// Inputs: N binary lines (imac_in) from the systolic array's sign bridge. A line at
// logic 1 is applied to the crossbar as +1.0, at logic 0 as -1.0: the FC layers are
// trained for inputs in {-1, +1}. Switch block k (k < NSUB) feeds subarray k from
// source 0 = these binary inputs, or source s+1 = the neuron outputs of subarray s.
// Switch block NSUB selects which subarray's neuron outputs reach the ADC (vout).
// With the default configuration written by the controller, subarray 0 takes the
// TPU inputs, subarray k takes subarray k-1, and the ADC sees the last FC layer.
//
// Timing: while run is high every subarray settles once per clock, so a chain of L
// FC layers has its result on vout L clocks after run rises, one clock per layer
// (the paper's "each FC layer executed in a single clock cycle").
//
// Configuration phase: prog_* writes one row of ternary weights into subarray
// prog_sub (see imac_subarray); cfg_we/cfg_sb/cfg_src program a switch block.
//
// Follows the paper: subarrays of crossbars, differential amplifiers and sigmoid
// neurons, switch blocks, binary inputs with no DAC, one cycle per FC layer, FC
// weights pre-loaded. Own choices: a square N x N subarray per FC layer, the
// whole-bus switch blocks, the {-1,+1} input levels, the programming ports.
module imac
  import tpu_imac_pkg::*;
#(
  parameter int unsigned N         = 1024,
  parameter int unsigned NSUB      = 2,
  parameter int unsigned AMP_SHIFT = 0,
  localparam int unsigned RW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SUBW = $clog2(NSUB + 1),
  localparam int unsigned SW  = $clog2(NSUB + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  wire  [N-1:0]        imac_in,
  input  logic                run,
  input  logic                prog_en,
  input  logic [SUBW-1:0]     prog_sub,
  input  logic [RW-1:0]       prog_row,
  input  logic [N-1:0][1:0]   prog_w,
  input  logic                cfg_we,
  input  logic [SUBW-1:0]     cfg_sb,
  input  logic [SW-1:0]       cfg_src,
  output volt_t [N-1:0]       vout
);
  localparam volt_t ONE = volt_t'(1) <<< VFRAC;

  volt_t [NSUB:0][N-1:0]   srcs;     // 0: binary inputs, s+1: subarray s
  volt_t [NSUB-1:0][N-1:0] sub_out;

  always_comb begin
    for (int i = 0; i < N; i++) srcs[0][i] = imac_in[i] ? ONE : -ONE;
    for (int s = 0; s < NSUB; s++) srcs[s+1] = sub_out[s];
  end

  for (genvar k = 0; k < NSUB; k++) begin : g_sub
    volt_t [N-1:0] vin;
    imac_switch_box #(.NIN(N), .NSRC(NSUB + 1)) u_sb (
      .clk, .rst_n,
      .cfg_we (cfg_we && cfg_sb == SUBW'(k)),
      .cfg_src(cfg_src),
      .src    (srcs),
      .dst    (vin)
    );
    imac_subarray #(.NIN(N), .NOUT(N), .AMP_SHIFT(AMP_SHIFT)) u_sa (
      .clk, .rst_n,
      .prog_en (prog_en && prog_sub == SUBW'(k)),
      .prog_row(prog_row),
      .prog_w  (prog_w),
      .run     (run),
      .vin     (vin),
      .vout    (sub_out[k])
    );
  end

  // output switch block towards the ADC (sources 0..NSUB-1 are the subarrays)
  imac_switch_box #(.NIN(N), .NSRC(NSUB)) u_sb_out (
    .clk, .rst_n,
    .cfg_we (cfg_we && cfg_sb == SUBW'(NSUB)),
    .cfg_src(cfg_src[$clog2(NSUB > 1 ? NSUB : 2)-1:0]),
    .src    (sub_out),
    .dst    (vout)
  );
endmodule
