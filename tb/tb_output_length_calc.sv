// tb_output_length_calc: checks m = floor(bs*H/8 - 25) for the published
// operating point (H = 2.6 bits per 8 gives m = 300), for the clamps at
// 0 and M_MAX, and for random H; the reference uses exact integer
// arithmetic on the fixed-point input.
module tb_output_length_calc;
  localparam int unsigned BS = 1000, SW = 8, F = 16, PEN = 25, M_MAX = 800;
  logic clk = 0, rst_n = 1, start = 0;
  logic [$clog2(SW+1)+F-1:0] hmin = '0;
  logic done;
  logic [$clog2(M_MAX+1)-1:0] m;
  int checks = 0, failures = 0;

  output_length_calc #(.BS(BS), .SW(SW), .F(F), .EPS_PEN(PEN), .M_MAX(M_MAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input longint hq);
    longint e;
    hmin = ($bits(hmin))'(hq);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    e = (longint'(BS) * hq) / (longint'(SW) << F) - PEN;
    if (e < 0) e = 0;
    if (e > M_MAX) e = M_MAX;
    checks += 2;
    if (!done) begin failures++; $display("done missing"); end
    if (longint'(m) != e) begin failures++; $display("H=%0d m=%0d expected %0d", hq, m, e); end
  endtask

  initial begin
    #1 rst_n = 0;   // reset edge before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(longint'(2.6 * 65536.0) + 1);
    checks++;
    if (m != 300) begin failures++; $display("published point: m=%0d", m); end
    run(0); run(1 << F); run(8 << F); run(200 * 65536 / 1000);
    for (int i = 0; i < 500; i++) run(longint'($urandom % (8 << F)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
