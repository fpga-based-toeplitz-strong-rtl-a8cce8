// output_buffer: random number output buffer.
//
// Each compute cycle of the extractor yields K bits, one per block, and is
// written here as one K-bit word. Word w = b*m + j holds output bit j of
// every block of batch b, bit k of the word coming from block k. The
// published output is the concatenation, per batch, of the m bits of block
// 1, then block 2, and so on; bit (b*K + k)*m + j of that string is bit k
// of word b*m + j here. The buffer itself is named in the published flow;
// its word layout, depth (all batches at the largest m) and the registered
// read port are this design's choices.
//
// Interface: one write port, one read port with one cycle read latency.
module output_buffer #(
  parameter int unsigned K     = tse_pkg::K_BLOCKS,
  parameter int unsigned DEPTH = tse_pkg::N_BATCH * tse_pkg::M_MAX
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [K-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [K-1:0]             rdata
);
  logic [K-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  a_waddr: assert property (@(posedge clk) we |-> 32'(waddr) < DEPTH);
  a_raddr: assert property (@(posedge clk) re |-> 32'(raddr) < DEPTH);
endmodule
