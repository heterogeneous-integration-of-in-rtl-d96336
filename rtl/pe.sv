// pe: one processing element of the output-stationary (OS) systolic array.
//
// The weight enters from the left neighbour (w_in) and the IFMap value from the
// neighbour above (x_in). Each is registered and handed on unchanged to the right
// (w_out) and downwards (x_out) one clock later, together with its valid flag. When
// both operands are valid in the same cycle the PE accumulates acc <= acc + w*x in
// FP32 (the multiply and the add are each rounded; see tpu_imac_pkg). The partial sum
// stays in the PE: this is what "output stationary" means.
//
// clr zeroes the accumulator (start of a new output tile). While shift is high the
// accumulator is instead loaded from acc_in, the accumulator of the PE above, so the
// column of OFMaps can be shifted out of the bottom of the array (drain). acc is
// always visible on acc_out; its bit 31 is the sign bit handed to the IMAC.
//
// Follows the paper: OS dataflow, weights from the left, IFMap from the top, FP32
// MAC in every PE. Own choices: valid flags travelling with the data, the clear
// input and the shift-based drain.
module pe
  import tpu_imac_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        shift,
  input  logic [31:0] w_in,
  input  logic        w_vin,
  input  logic [31:0] x_in,
  input  logic        x_vin,
  input  logic [31:0] acc_in,
  output logic [31:0] w_out,
  output logic        w_vout,
  output logic [31:0] x_out,
  output logic        x_vout,
  output logic [31:0] acc_out
);
  logic [31:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_out <= '0; w_vout <= 1'b0;
      x_out <= '0; x_vout <= 1'b0;
      acc   <= '0;
    end else begin
      w_out  <= w_in;  w_vout <= w_vin;
      x_out  <= x_in;  x_vout <= x_vin;
      if (clr)                acc <= '0;
      else if (shift)         acc <= acc_in;
      else if (w_vin && x_vin) acc <= fp32_mac(acc, w_in, x_in);
    end
  end

  assign acc_out = acc;
endmodule
