// output_length_calc: extractor output length m from the leftover hash lemma.
//
// With Hmin bits of min-entropy per SW-bit sample, a block of BS raw bits
// holds BS*Hmin/SW bits of min-entropy, and the lemma allows
//   m = floor(BS*Hmin/SW - 2*log2(1/eps))
// nearly uniform output bits. With BS = 1000, Hmin = 2.6 bits per 8 and
// eps = 2^-12.5 this gives 325 - 25 = 300, the value the published design
// reports. The formula is reconstructed from those numbers; the clamp to
// [0, M_MAX] and the one-cycle register are this design's choices.
//
// Interface: hmin is unsigned fixed point with F fractional bits. Pulse
// start with hmin valid; done pulses one cycle later with m.
module output_length_calc #(
  parameter int unsigned BS      = tse_pkg::BS,
  parameter int unsigned SW      = tse_pkg::SAMPLE_W,
  parameter int unsigned F       = tse_pkg::LOG_F,
  parameter int unsigned EPS_PEN = tse_pkg::EPS_PEN,
  parameter int unsigned M_MAX   = tse_pkg::M_MAX
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [$clog2(SW+1)+F-1:0]    hmin,
  output logic                         done,
  output logic [$clog2(M_MAX+1)-1:0]   m
);
  localparam int unsigned HW = $clog2(SW + 1) + F;
  localparam int unsigned MW = $clog2(M_MAX + 1);
  localparam int unsigned PW = HW + $clog2(BS + 1);
  localparam int unsigned SH = F + $clog2(SW);

  logic [PW-1:0] prod;
  logic [PW-1:0] bits;     // floor(BS*Hmin/SW)
  logic [MW-1:0] m_next;

  initial assert ((1 << $clog2(SW)) == SW) else $error("SW must be a power of two");

  assign prod = PW'(BS) * PW'(hmin);
  assign bits = prod >> SH;

  always_comb begin
    if (bits <= PW'(EPS_PEN))                m_next = '0;
    else if (bits - PW'(EPS_PEN) > PW'(M_MAX)) m_next = MW'(M_MAX);
    else                                     m_next = MW'(bits - PW'(EPS_PEN));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      m    <= '0;
    end else begin
      done <= start;
      if (start) m <= m_next;
    end
  end
endmodule
