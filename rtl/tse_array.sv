// tse_array: K Toeplitz extractors working on the K blocks of one batch.
//
// The batch of K*BS raw bits is split into K blocks, block k being bits
// [k*BS +: BS]. All blocks use the same Toeplitz matrix, so one copy of the
// Toeplitz string is kept in a shift register and its low BS bits are the
// window shared by all K tse_block lanes. In the j-th compute cycle the
// window is ts[j+BS-1:j] (the j-th sub-string); after each compute cycle
// the register shifts right by one. Every compute cycle thus produces one
// bit per block, K bits in all, and m compute cycles finish the batch. The
// sliding sub-string and the K = 40 parallel blocks are published; block k
// at bits [k*BS +: BS] of the batch is this design's choice.
//
// Interface: load copies ts into the shift register (start of a batch).
// shift marks a compute cycle. bits holds the K lane outputs of the
// previous compute cycle, flagged by bits_valid (one cycle latency);
// bits[k] belongs to block k.
module tse_array #(
  parameter int unsigned K     = tse_pkg::K_BLOCKS,
  parameter int unsigned BS    = tse_pkg::BS,
  parameter int unsigned M_MAX = tse_pkg::M_MAX
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic                 shift,
  input  logic [BS+M_MAX-2:0]  ts,
  input  logic [K*BS-1:0]      batch,
  output logic [K-1:0]         bits,
  output logic                 bits_valid
);
  localparam int unsigned TSW = BS + M_MAX - 1;

  logic [TSW-1:0] sh_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q       <= '0;
      bits_valid <= 1'b0;
    end else begin
      bits_valid <= shift;
      if (load)       sh_q <= ts;
      else if (shift) sh_q <= sh_q >> 1;
    end
  end

  for (genvar k = 0; k < int'(K); k++) begin : g_lane
    tse_block #(.BS(BS)) u_blk (
      .clk, .rst_n,
      .en     (shift),
      .window (sh_q[BS-1:0]),
      .blk    (batch[k*BS +: BS]),
      .out_bit(bits[k])
    );
  end

  a_excl: assert property (@(posedge clk) disable iff (!rst_n) !(load && shift));
endmodule
