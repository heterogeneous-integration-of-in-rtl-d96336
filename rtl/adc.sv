// adc: behavioural model of the analog-to-digital converter attached to the IMAC.
//
// CH channels, one per neuron output of the IMAC's output bus, are sampled together
// when convert is pulsed and digitised to BITS-bit unsigned codes; done pulses
// LATENCY clocks later and the codes stay readable until the next conversion
// (rd_ch selects one code, combinational read). A neuron output spans [0, 1.0]; the
// code is floor(v * 2**BITS), saturated to 2**BITS - 1 (so 1.0 reads as full scale).
//
// This models a mixed-signal part: inputs are modelled analog voltages
// (tpu_imac_pkg::volt_t). The paper names the ADC and its place (IMAC outputs to
// LPDDR) only; the resolution, the channel count, the parallel sampling and the
// latency are choices of this model. BITS must not exceed VFRAC.
module adc
  import tpu_imac_pkg::*;
#(
  parameter int unsigned CH      = 1024,
  parameter int unsigned BITS    = 8,
  parameter int unsigned LATENCY = 1,
  localparam int unsigned CW = (CH > 1) ? $clog2(CH) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  volt_t [CH-1:0]     vin,
  input  logic               convert,
  output logic               done,
  input  logic [CW-1:0]      rd_ch,
  output logic [BITS-1:0]    rd_code
);
  localparam volt_t FS = (volt_t'(1) <<< BITS) - 1;

  logic [CH-1:0][BITS-1:0] codes;
  logic [LATENCY:0]        busy;

  function automatic logic [BITS-1:0] quantise(input volt_t v);
    volt_t q;
    q = v >>> (VFRAC - BITS);
    if (q < 0)  return '0;
    if (q > FS) return BITS'(FS);
    return q[BITS-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      codes <= '0;
      busy  <= '0;
    end else begin
      busy <= {busy[LATENCY-1:0], convert};
      if (convert)
        for (int c = 0; c < CH; c++) codes[c] <= quantise(vin[c]);
    end
  end

  assign done    = busy[LATENCY-1];
  assign rd_code = codes[rd_ch];
endmodule
