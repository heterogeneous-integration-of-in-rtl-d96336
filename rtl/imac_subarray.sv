// imac_subarray: behavioural model of one n x m IMAC subarray (one FC layer).
//
// Physical structure: a memristive crossbar with NIN input columns (voltages V_i)
// and NOUT output rows; every row is a pair of word lines, a positive one with
// conductances G+_{i,r} and a negative one with G-_{i,r}. A synapse weight is
// W_{i,r} ~ G+ - G-: (high, low) conductance is +1, (low, high) is -1, equal is 0.
// The row pair feeds a differential amplifier whose output is proportional to
// sum_i (I+_{i,r} - I-_{i,r}) = sum_i W_{i,r} V_i; an analog sigmoid neuron follows.
//
// Model: conductances are normalised to 1 (low resistance) and 0 (high resistance,
// taken as an open circuit), voltages are fixed-point (tpu_imac_pkg::volt_t). The
// amplifier gain is 2**-AMP_SHIFT. The analog settling of one layer is modelled as
// one clock cycle: with run high, vout is the sigmoid of the current inputs one
// clock later. With run low the outputs hold.
//
// Configuration phase: prog_en writes the NIN ternary weights of row prog_row
// (encoding tern_t: 00 zero, 01 +1, 11 -1), one row per clock. The write path
// (write word lines) is not described beyond its existence, so this port is a
// modelling choice. Weights start at zero after reset.
module imac_subarray
  import tpu_imac_pkg::*;
#(
  parameter int unsigned NIN       = 1024,
  parameter int unsigned NOUT      = 1024,
  parameter int unsigned AMP_SHIFT = 0,
  localparam int unsigned RW = (NOUT > 1) ? $clog2(NOUT) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  prog_en,
  input  logic [RW-1:0]         prog_row,
  input  logic [NIN-1:0][1:0]   prog_w,
  input  logic                  run,
  input  volt_t [NIN-1:0]       vin,
  output volt_t [NOUT-1:0]      vout
);
  for (genvar r = 0; r < NOUT; r++) begin : g_row
    logic [NIN-1:0] gpos, gneg;   // 1 = low-resistance (conducting) device
    volt_t          vdiff;        // differential amplifier output
    volt_t          vneu;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        gpos <= '0;
        gneg <= '0;
      end else if (prog_en && prog_row == RW'(r)) begin
        for (int i = 0; i < NIN; i++) begin
          gpos[i] <= (prog_w[i] == W_POS);
          gneg[i] <= (prog_w[i] == W_NEG);
        end
      end
    end

    always_comb begin
      volt_t ip, in_;
      ip  = '0;
      in_ = '0;
      for (int i = 0; i < NIN; i++) begin
        if (gpos[i]) ip  = ip  + vin[i];   // I+ on the positive word line
        if (gneg[i]) in_ = in_ + vin[i];   // I- on the negative word line
      end
      vdiff = (ip - in_) >>> AMP_SHIFT;
    end

    sigmoid_neuron u_neuron (.vin(vdiff), .vout(vneu));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)   vout[r] <= '0;
      else if (run) vout[r] <= vneu;
    end
  end
endmodule
