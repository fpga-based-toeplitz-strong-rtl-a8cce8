// tb_tse_array: loads a random Toeplitz string, runs m compute cycles on a
// random batch, and checks every lane bit of every cycle against the
// Toeplitz product row j: bit = XOR over i of ts[j+i] & block_k[i]. Runs
// several batches in a row to check that load restarts the window.
module tb_tse_array;
  localparam int unsigned K = 5, BS = 16, M_MAX = 8;
  localparam int unsigned TSW = BS + M_MAX - 1;
  logic clk = 0, rst_n = 1, load = 0, shift = 0;
  logic [TSW-1:0] ts;
  logic [K*BS-1:0] batch;
  logic [K-1:0] bits;
  logic bits_valid;
  int checks = 0, failures = 0;

  tse_array #(.K(K), .BS(BS), .M_MAX(M_MAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ts = '0; batch = '0;
    #1 rst_n = 0;   // reset edge before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      int mm;
      mm = 1 + int'($urandom % M_MAX);
      for (int i = 0; i < int'(TSW); i++) ts[i] = 1'($urandom);
      for (int i = 0; i < int'(K*BS); i++) batch[i] = 1'($urandom);
      load = 1;
      @(negedge clk) load = 0;
      for (int j = 0; j < mm; j++) begin
        shift = 1;
        @(negedge clk) shift = 0;
        checks++;
        if (!bits_valid) begin failures++; $display("bits_valid low"); end
        for (int k = 0; k < int'(K); k++) begin
          bit e;
          e = 0;
          for (int i = 0; i < int'(BS); i++) e ^= ts[j+i] & batch[k*BS+i];
          checks++;
          if (bits[k] != e) begin failures++; if (failures < 10) $display("b=%0d j=%0d k=%0d", b, j, k); end
        end
        if ($urandom % 3 == 0) begin
          @(negedge clk);
          checks++;
          if (bits_valid) begin failures++; $display("bits_valid high when idle"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
