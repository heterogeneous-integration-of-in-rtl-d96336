// lpddr_model: behavioural model of the external LPDDR memory, for testbenches.
//
// A word-addressed memory of 2**AW 32-bit words behind the accelerator's memory
// port: a request (req with we/addr/wdata held) is answered LAT clocks later by a
// one-clock ack; a read returns its word on rdata with ack. Only one request is
// served at a time. The testbench preloads and inspects the array mem directly and
// reads the access counters. Timing is not that of a real LPDDR device.
module lpddr_model #(
  parameter int unsigned AW  = 16,
  parameter int unsigned LAT = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic        ack,
  output logic [31:0] rdata
);
  logic [31:0] mem [2**AW];
  int unsigned cnt;
  int unsigned n_reads = 0, n_writes = 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack   <= 1'b0;
      cnt   <= 0;
      rdata <= '0;
    end else begin
      ack <= 1'b0;
      if (req && !ack) begin
        if (cnt == LAT - 1) begin
          cnt <= 0;
          ack <= 1'b1;
          if (we) begin
            mem[addr[AW-1:0]] <= wdata;
            n_writes <= n_writes + 1;
          end else begin
            rdata   <= mem[addr[AW-1:0]];
            n_reads <= n_reads + 1;
          end
        end else cnt <= cnt + 1;
      end
    end
  end

  // a request is held, unchanged, until it is acknowledged
  assert property (@(posedge clk) disable iff (!rst_n) (req && !ack) |=> req || ack);
endmodule
