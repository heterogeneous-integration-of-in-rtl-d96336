// activation_unit: activation applied to OFMap words outside the systolic array, on
// their way from the OFMap SRAM to LPDDR.
//
// One FP32 word per cycle, registered (one cycle latency, in_valid -> out_valid).
// With relu_en high a negative word (sign bit set) becomes +0.0; otherwise the word
// passes unchanged (bypass, for a layer without activation or for a layer whose
// pre-activation values are still needed).
//
// Follows the paper: a separate unit outside the array performs activation; the
// convolutional layers use ReLU. Normalization, which the paper mentions as a
// possible job of the same unit without describing it, is not implemented.
module activation_unit (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        relu_en,
  input  logic        in_valid,
  input  logic [31:0] in_data,
  output logic        out_valid,
  output logic [31:0] out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= (relu_en && in_data[31]) ? 32'd0 : in_data;
    end
  end
endmodule
