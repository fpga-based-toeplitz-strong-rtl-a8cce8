// sample_mem: on-chip memory holding one raw QRNG sample of S_BITS bits.
//
// The ADC delivers 8-bit samples, which are written in arrival order. The
// memory is organised as S_BITS/L words of L bits, one word per batch, so
// that a whole batch of K blocks is read in a single cycle when extraction
// starts on it. Byte o of word w holds raw bits [w*L + 8*o +: 8]. A second,
// byte-wide read port feeds the min-entropy evaluation. The published flow
// only names a memory between the ADC and the post-processing; the
// organisation and the ports are this design's choices.
//
// Interface: byte addresses are given as (word, byte-in-word) pairs. Both
// read ports are registered: data appears the cycle after the enable.
module sample_mem #(
  parameter int unsigned S_BITS = tse_pkg::S_BITS,
  parameter int unsigned L      = tse_pkg::L_BITS,
  parameter int unsigned SW     = tse_pkg::SAMPLE_W
) (
  input  logic                              clk,
  // byte write port
  input  logic                              wr_en,
  input  logic [$clog2(S_BITS/L)-1:0]       wr_word,
  input  logic [$clog2(L/SW)-1:0]           wr_byte,
  input  logic [SW-1:0]                     wr_data,
  // byte read port
  input  logic                              brd_en,
  input  logic [$clog2(S_BITS/L)-1:0]       brd_word,
  input  logic [$clog2(L/SW)-1:0]           brd_byte,
  output logic [SW-1:0]                     brd_data,
  // batch read port
  input  logic                              wrd_en,
  input  logic [$clog2(S_BITS/L)-1:0]       wrd_word,
  output logic [L-1:0]                      wrd_data
);
  localparam int unsigned NW  = S_BITS / L;
  localparam int unsigned NBY = L / SW;

  logic [L-1:0] mem [NW];

  always_ff @(posedge clk) begin
    if (wr_en)  mem[wr_word][wr_byte*SW +: SW] <= wr_data;
    if (brd_en) brd_data <= mem[brd_word][brd_byte*SW +: SW];
    if (wrd_en) wrd_data <= mem[wrd_word];
  end

  a_wr:  assert property (@(posedge clk) wr_en  |-> 32'(wr_word)  < NW && 32'(wr_byte)  < NBY);
  a_brd: assert property (@(posedge clk) brd_en |-> 32'(brd_word) < NW && 32'(brd_byte) < NBY);
  a_wrd: assert property (@(posedge clk) wrd_en |-> 32'(wrd_word) < NW);
endmodule
