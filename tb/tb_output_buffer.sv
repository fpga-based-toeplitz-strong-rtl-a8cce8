// tb_output_buffer: random writes and reads, compared with a copy kept
// here; the read data must appear one cycle after re and hold otherwise.
module tb_output_buffer;
  localparam int unsigned K = 40, DEPTH = 300;
  logic clk = 0, we = 0, re = 0;
  logic [$clog2(DEPTH)-1:0] waddr = '0, raddr = '0;
  logic [K-1:0] wdata = '0, rdata;
  logic [K-1:0] shadow [DEPTH];
  bit written [DEPTH];
  int checks = 0, failures = 0;

  output_buffer #(.K(K), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [K-1:0] exp;
    int a;
    repeat (2) @(negedge clk);
    for (int i = 0; i < int'(DEPTH); i++) begin
      we = 1; waddr = ($bits(waddr))'(i); wdata = {$urandom, $urandom};
      shadow[i] = wdata; written[i] = 1;
      @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 3000; t++) begin
      we = ($urandom % 2 == 0);
      a = int'($urandom % DEPTH);
      waddr = ($bits(waddr))'(a); wdata = {$urandom, $urandom};
      re = ($urandom % 3 != 0);
      raddr = ($bits(raddr))'($urandom % DEPTH);
      exp = re ? shadow[raddr] : rdata;
      @(negedge clk);
      if (we) shadow[a] = wdata;
      checks++;
      if (rdata != exp) begin failures++; if (failures < 10) $display("t=%0d addr %0d", t, raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
