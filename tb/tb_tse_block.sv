// tb_tse_block: random windows and blocks at the full bs = 1000; the
// expected bit is the modulo-2 sum of the bitwise products, counted here
// one bit at a time. Also checks that the output holds while en is low.
module tb_tse_block;
  localparam int unsigned BS = 1000;
  logic clk = 0, rst_n = 1, en = 0;
  logic [BS-1:0] window, blk;
  logic out_bit;
  int checks = 0, failures = 0;

  tse_block #(.BS(BS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [BS-1:0] rnd();
    logic [BS-1:0] v;
    for (int i = 0; i < int'(BS); i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    bit e, held;
    int ones;
    window = '0; blk = '0;
    #1 rst_n = 0;   // reset edge before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      window = rnd();
      blk    = (t % 7 == 0) ? ~window : rnd();
      if (t % 11 == 0) blk[$urandom % BS] ^= 1'b1;
      en = ($urandom % 4 != 0);
      held = out_bit;
      ones = 0;
      for (int i = 0; i < int'(BS); i++) if (window[i] && blk[i]) ones++;
      e = en ? ones[0] : held;
      @(negedge clk);
      checks++;
      if (out_bit != e) begin failures++; if (failures < 10) $display("t=%0d got %0d exp %0d", t, out_bit, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
