// sign_bridge: the direct connection from the systolic array's PEs to the IMAC
// inputs.
//
// For each of the N*N PEs the sign bit (bit 31) of its FP32 OFMap goes through an
// inverter, so that an OFMap >= 0 becomes logic 1 and a negative one logic 0: the
// OFMap is binarised with no further hardware. The inverted bit reaches the IMAC
// input line through a tri-state buffer whose enable (oe) comes from the Main
// Controller; with oe low the lines float (high impedance) and the IMAC inputs are
// free for other drivers. Purely combinational, no latency.
//
// IMAC input k = j*N + i takes PE(i,j) (filter row i, pixel column j). This is the
// channel-last order in which an H x W x C feature map is flattened; the order
// itself is a choice of this design (any fixed order can be absorbed into the
// trained FC weights). Note that -0.0 has its sign bit set and so reads as 0.
//
// Follows the paper: sign bit, inverter, tri-state buffer, enable from the Main
// Controller.
module sign_bridge #(
  parameter int unsigned N = 32
) (
  input  logic                      oe,
  input  logic [N-1:0][N-1:0][31:0] acc,
  output wire  [N*N-1:0]            imac_in
);
  for (genvar i = 0; i < N; i++) begin : g_r
    for (genvar j = 0; j < N; j++) begin : g_c
      wire sb_n = ~acc[i][j][31];              // inverter
      assign imac_in[j*N + i] = oe ? sb_n : 1'bz; // tri-state buffer
    end
  end
endmodule
