// tb_sample_mem: fills a reduced sample memory byte by byte, then checks
// the byte read port and the whole-word batch port against the bytes
// written (byte o of word w at bits [8*o +: 8]).
module tb_sample_mem;
  localparam int unsigned S_BITS = 1024, L = 256, SW = 8;
  localparam int unsigned NW = S_BITS / L, NBY = L / SW;
  logic clk = 0, wr_en = 0, brd_en = 0, wrd_en = 0;
  logic [$clog2(NW)-1:0] wr_word = '0, brd_word = '0, wrd_word = '0;
  logic [$clog2(NBY)-1:0] wr_byte = '0, brd_byte = '0;
  logic [SW-1:0] wr_data = '0, brd_data;
  logic [L-1:0] wrd_data;
  logic [7:0] bytes [NW][NBY];
  int checks = 0, failures = 0;

  sample_mem #(.S_BITS(S_BITS), .L(L), .SW(SW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    for (int w = 0; w < int'(NW); w++)
      for (int o = 0; o < int'(NBY); o++) begin
        wr_en = 1; wr_word = ($bits(wr_word))'(w); wr_byte = ($bits(wr_byte))'(o);
        wr_data = 8'($urandom);
        bytes[w][o] = wr_data;
        @(negedge clk);
      end
    wr_en = 0;
    for (int t = 0; t < 500; t++) begin
      int w, o;
      w = int'($urandom % NW); o = int'($urandom % NBY);
      brd_en = 1; brd_word = ($bits(brd_word))'(w); brd_byte = ($bits(brd_byte))'(o);
      @(negedge clk) brd_en = 0;
      checks++;
      if (brd_data != bytes[w][o]) begin failures++; if (failures < 10) $display("byte %0d/%0d", w, o); end
    end
    for (int w = 0; w < int'(NW); w++) begin
      wrd_en = 1; wrd_word = ($bits(wrd_word))'(w);
      @(negedge clk) wrd_en = 0;
      for (int o = 0; o < int'(NBY); o++) begin
        checks++;
        if (wrd_data[o*8 +: 8] != bytes[w][o]) begin failures++; if (failures < 10) $display("word %0d byte %0d", w, o); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
