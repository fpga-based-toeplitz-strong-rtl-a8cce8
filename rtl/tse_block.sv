// tse_block: Toeplitz extractor for one raw block of BS bits.
//
// Each clock, the current BS-bit sub-string of the Toeplitz string (one row
// of the Toeplitz matrix) is multiplied bit by bit with the raw block (AND)
// and the products are added modulo 2 (an XOR reduction), giving one
// extracted bit. Over m clocks the window slides by one bit per clock and
// the block yields its m output bits. The AND/XOR row product is the
// published scheme; pairing raw bit i with window bit i and registering the
// result are this design's choices.
//
// Interface: when en is high, out_bit takes ^(window & blk) at the clock
// edge (one cycle latency); otherwise it holds.
module tse_block #(
  parameter int unsigned BS = tse_pkg::BS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [BS-1:0] window,
  input  logic [BS-1:0] blk,
  output logic          out_bit
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  out_bit <= 1'b0;
    else if (en) out_bit <= ^(window & blk);
  end
endmodule
