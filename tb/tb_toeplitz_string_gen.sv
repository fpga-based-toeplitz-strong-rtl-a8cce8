// tb_toeplitz_string_gen: generates Toeplitz strings for several m and
// seeds at reduced bs, and compares ts (first bit at index 0, unused bits
// zero), ts_len and the BS+m cycle latency with the reference LFSR.
module tb_toeplitz_string_gen;
  import tse_ref_pkg::*;
  localparam int unsigned BS = 24, M_MAX = 12;
  logic clk = 0, rst_n = 1, start = 0;
  logic [22:0] raw_seed = '0;
  logic [$clog2(M_MAX+1)-1:0] m = '0;
  logic busy, done;
  logic [BS+M_MAX-2:0] ts;
  logic [$clog2(BS+M_MAX)-1:0] ts_len;
  int checks = 0, failures = 0;

  toeplitz_string_gen #(.BS(BS), .M_MAX(M_MAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [22:0] seed, input int mm);
    bit r[$];
    int lat;
    lfsr_bits(seed, BS + mm - 1, r);
    raw_seed = seed;
    m = ($bits(m))'(mm);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks += 3;
    if (lat != int'(BS) + mm) begin failures++; $display("latency %0d m=%0d", lat, mm); end
    if (int'(ts_len) != int'(BS) + mm - 1) begin failures++; $display("ts_len %0d", ts_len); end
    for (int i = 0; i < int'(BS + M_MAX - 1); i++) begin
      bit e;
      e = (i < int'(BS) + mm - 1) ? r[i] : 1'b0;
      if (ts[i] != e) begin
        failures++;
        $display("m=%0d ts[%0d]=%0d expected %0d", mm, i, ts[i], e);
        break;
      end
    end
  endtask

  initial begin
    #1 rst_n = 0;   // reset edge before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(23'h155555, 1);
    run(23'h0abcde, M_MAX);
    for (int k = 0; k < 20; k++) run(23'($urandom), 1 + int'($urandom % M_MAX));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
