// One bank of the L1 tightly coupled data memory.
//
// A single-port synchronous SRAM of WORDS x 64 bit with byte enables: a request is served in
// the cycle it is made, read data appear on the next cycle. Sixteen of these make the 128 KiB
// L1 of the cluster (1024 words each). The paper gives the bank count, the width and the total
// size; the one-cycle read latency is this design's choice for a "low-latency" L1. In silicon
// this is an SRAM macro; here it is a memory array. Contents are not reset.
module tcdm_bank #(
  parameter int unsigned WORDS = 1024
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [7:0]               be_i,
  input  logic [63:0]              wdata_i,
  output logic [63:0]              rdata_o
);

  logic [63:0] mem_q [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 8; b++) if (be_i[b]) mem_q[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem_q[addr_i];
      end
    end
  end

endmodule
