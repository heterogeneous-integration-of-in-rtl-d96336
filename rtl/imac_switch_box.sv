// imac_switch_box: programmable switch block of the IMAC network.
//
// The IMAC's subarrays are joined by switch blocks that decide which signals reach a
// subarray's input columns. This block connects one of NSRC source buses (each NIN
// modelled analog voltages wide) to its output bus, chosen by the configuration
// register cfg_src, which is written (cfg_we) during the configuration phase. An
// unconfigured (reset) switch selects source 0.
//
// The paper shows the switch blocks (Fig. 1(a), Fig. 2(b)) and says that they are
// programmable and interconnect the subarrays; their circuit is not given. Here a
// switch block is a bus multiplexer with a configuration register; the routing of a
// whole bus at once is a simplification of the mesh drawn in the figures.
module imac_switch_box
  import tpu_imac_pkg::*;
#(
  parameter int unsigned NIN  = 1024,
  parameter int unsigned NSRC = 3,
  localparam int unsigned SW = (NSRC > 1) ? $clog2(NSRC) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_we,
  input  logic [SW-1:0]             cfg_src,
  input  volt_t [NSRC-1:0][NIN-1:0] src,
  output volt_t [NIN-1:0]           dst
);
  logic [SW-1:0] sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      sel <= '0;
    else if (cfg_we) sel <= cfg_src;
  end

  always_comb begin
    dst = src[0];
    for (int s = 0; s < NSRC; s++)
      if (sel == SW'(s)) dst = src[s];
  end
endmodule
