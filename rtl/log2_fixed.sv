// log2_fixed: sequential fixed-point base-2 logarithm of an unsigned integer.
//
// The min-entropy of the raw sample is -log2(pmax) = log2(N) - log2(cmax),
// where cmax is the count of the most frequent ADC value among N samples;
// this unit computes log2(cmax). The integer part is the position of the
// leading one. The input is then normalised to a mantissa y in [1,2) and
// each fractional bit is found by squaring: if y*y >= 2 the bit is one and
// y*y/2 is kept, otherwise the bit is zero and y*y is kept. The method and
// the widths are this design's choice; the published description only says
// that the min-entropy is evaluated.
//
// Interface: pulse start with x valid (x must be non-zero; x = 0 gives 0).
// Timing: done pulses F+1 cycles after start, with result held until the
// next start. result is unsigned Qi.F, i = $clog2(IN_W) integer bits.
module log2_fixed #(
  parameter int unsigned IN_W = 17,
  parameter int unsigned F    = 16,
  parameter int unsigned MW   = 24   // mantissa width, Q1.(MW-1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [IN_W-1:0]             x,
  output logic                        busy,
  output logic                        done,
  output logic [$clog2(IN_W)+F-1:0]   result
);
  localparam int unsigned IW = $clog2(IN_W);
  localparam int unsigned CW = $clog2(F + 1);

  logic [MW-1:0]   y_q;
  logic [CW-1:0]   cnt_q;
  logic [IW-1:0]   msb;
  logic [MW-1:0]   y_norm;
  logic [2*MW-1:0] sq;
  logic [IW-1:0]   int_q;
  logic [F-1:0]    frac_q;

  initial assert (MW >= IN_W) else $error("log2_fixed: MW must be >= IN_W");

  // Leading-one position of x.
  always_comb begin
    msb = '0;
    for (int i = 0; i < int'(IN_W); i++)
      if (x[i]) msb = IW'(i);
  end

  // x shifted so that its leading one lands on the mantissa MSB.
  always_comb begin
    logic [MW-1:0] xw;
    xw     = MW'(x);
    y_norm = xw << (MW - 1 - 32'(msb));
  end

  assign sq     = y_q * y_q;
  assign result = {int_q, frac_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_q    <= '0;
      cnt_q  <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      int_q  <= '0;
      frac_q <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        y_q    <= y_norm;
        cnt_q  <= CW'(F);
        busy   <= 1'b1;
        int_q  <= msb;
        frac_q <= '0;
      end else if (busy) begin
        if (sq[2*MW-1]) begin
          y_q    <= sq[2*MW-1 -: MW];
          frac_q <= {frac_q[F-2:0], 1'b1};
        end else begin
          y_q    <= sq[2*MW-2 -: MW];
          frac_q <= {frac_q[F-2:0], 1'b0};
        end
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
