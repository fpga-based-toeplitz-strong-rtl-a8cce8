// tb_log2_fixed: checks the fixed-point log2 against real arithmetic for
// powers of two, edge values and random inputs, and checks that done comes
// F+1 cycles after start.
module tb_log2_fixed;
  import tse_ref_pkg::*;
  localparam int unsigned IN_W = 17, F = 16;
  logic clk = 0, rst_n = 1, start = 0;
  logic [IN_W-1:0] x;
  logic busy, done;
  logic [$clog2(IN_W)+F-1:0] result;
  int checks = 0, failures = 0;

  log2_fixed #(.IN_W(IN_W), .F(F), .MW(IN_W + 8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int unsigned v);
    int lat;
    real got, exp;
    x = IN_W'(v);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    got = real'(result) / real'(1 << F);
    exp = rlog2(real'(v));
    checks += 2;
    if (lat != F + 1) begin failures++; $display("latency %0d for x=%0d", lat, v); end
    if (got > exp + 1.0e-9 || got < exp - 4.0 / real'(1 << F)) begin
      failures++;
      $display("x=%0d log2 got %f expected %f", v, got, exp);
    end
  endtask

  initial begin
    x = '0;
    #1 rst_n = 0;   // reset edge before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < int'(IN_W); i++) run(1 << i);
    run(3); run(5); run(100000); run(131071); run(16499); run(99999);
    for (int i = 0; i < 300; i++) run(1 + ($urandom % ((1 << IN_W) - 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
