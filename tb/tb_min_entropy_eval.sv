// tb_min_entropy_eval: feeds skewed random samples (with idle gaps) into
// the min-entropy unit, and compares cmax with a histogram kept here and
// hmin with log2(N/cmax) computed in real arithmetic. Also checks that
// done comes F+3 cycles after the last sample, and that a second run
// starts from a cleared histogram.
module tb_min_entropy_eval;
  import tse_ref_pkg::*;
  localparam int unsigned SW = 8, N = 2000, F = 16;
  logic clk = 0, rst_n = 1, start = 0, smp_valid = 0;
  logic [SW-1:0] smp_data = '0;
  logic busy, done;
  logic [$clog2(N+1)-1:0] cmax;
  logic [$clog2(SW+1)+F-1:0] hmin;
  int checks = 0, failures = 0;

  min_entropy_eval #(.SW(SW), .N_SAMPLES(N), .F(F)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int spread);
    int hist[256];
    int mx, lat;
    real h, got;
    foreach (hist[i]) hist[i] = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int i = 0; i < int'(N); i++) begin
      int v;
      // sum of three uniform values: a peaked distribution
      v = 128 + int'($urandom % spread) + int'($urandom % spread)
              + int'($urandom % spread) - 3 * (spread / 2);
      v = v & 255;
      hist[v]++;
      if ($urandom % 4 == 0) @(negedge clk);   // idle gap
      smp_valid = 1; smp_data = SW'(v);
      @(negedge clk);
      smp_valid = 0;
    end
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    mx = 0;
    foreach (hist[i]) if (hist[i] > mx) mx = hist[i];
    h   = rlog2(real'(N) / real'(mx));
    got = real'(hmin) / real'(1 << F);
    checks += 3;
    if (int'(cmax) != mx) begin failures++; $display("cmax %0d expected %0d", cmax, mx); end
    if (got < h - 8.0 / real'(1 << F) || got > h + 8.0 / real'(1 << F)) begin
      failures++; $display("hmin %f expected %f", got, h);
    end
    if (lat != int'(F) + 3) begin failures++; $display("latency %0d", lat); end
  endtask

  initial begin
    #1 rst_n = 0;   // reset edge before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(4);
    run(40);
    run(200);
    run(1);
    run(2);
    run(90);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
