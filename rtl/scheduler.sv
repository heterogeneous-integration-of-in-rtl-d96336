// scheduler: layer-by-layer sequencing of a CNN workload.
//
// The scheduler is programmed with the network topology: a table of up to
// MAX_LAYERS layer descriptors (tpu_imac_pkg::layer_desc_t), written through
// tbl_we / tbl_addr / tbl_data before a run. On start it hands the layers, in table
// order, to the Main Controller: req stays high with the current descriptor on layer
// until the controller pulses layer_done, then the next entry follows. A descriptor
// of kind L_CONV goes to the systolic array, one of kind L_FC to the IMAC (the
// scheduler thereby tells the controller that the FC part has been reached). The run
// ends at an L_END entry or after the last table entry: busy falls and net_done
// pulses. layers_run counts the layers issued in the last run.
//
// Follows the paper: the scheduler schedules each layer of the CNN and is
// programmed according to the topology; it requests FC execution from the Main
// Controller. The table form, its depth and the request/done handshake are this
// design's choices.
module scheduler
  import tpu_imac_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 32,
  localparam int unsigned AW = $clog2(MAX_LAYERS)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tbl_we,
  input  logic [AW-1:0] tbl_addr,
  input  layer_desc_t tbl_data,
  input  logic        start,
  output logic        busy,
  output logic        req,
  output layer_desc_t layer,
  input  logic        layer_done,
  output logic        net_done,
  output logic [AW:0] layers_run
);
  layer_desc_t  table_q [MAX_LAYERS];
  logic [AW:0]  idx;
  logic         is_end;

  assign layer  = table_q[idx[AW-1:0]];
  assign is_end = (idx == (AW+1)'(MAX_LAYERS)) || (layer.kind == L_END);
  assign req    = busy && !is_end;

  always_ff @(posedge clk) begin
    if (tbl_we && !busy) table_q[tbl_addr] <= tbl_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      idx        <= '0;
      net_done   <= 1'b0;
      layers_run <= '0;
    end else begin
      net_done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy       <= 1'b1;
          idx        <= '0;
          layers_run <= '0;
        end
      end else if (is_end) begin
        busy     <= 1'b0;
        net_done <= 1'b1;
      end else if (layer_done) begin
        idx        <= idx + 1'b1;
        layers_run <= layers_run + 1'b1;
      end
    end
  end

  // the controller only reports completion of a layer it was asked for
  assert property (@(posedge clk) disable iff (!rst_n) layer_done |-> req);
endmodule
