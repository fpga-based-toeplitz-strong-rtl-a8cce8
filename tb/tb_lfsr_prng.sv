// tb_lfsr_prng: compares the LFSR output stream with a stage-by-stage
// model of the 25-stage register (feedback from stages 1, 2, 17, 23 into
// stage 25, output from stage 1) for several raw seeds, including steps
// with step low, which must hold the state.
module tb_lfsr_prng;
  import tse_ref_pkg::*;
  logic clk = 0, rst_n = 1, load = 0, step = 0;
  logic [22:0] raw_seed = '0;
  logic prng_out;
  logic [24:0] state;
  int checks = 0, failures = 0;

  lfsr_prng dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [22:0] seed, input int n);
    bit ref_bits[$];
    int i;
    lfsr_bits(seed, n, ref_bits);
    raw_seed = seed;
    @(negedge clk) load = 1;
    @(negedge clk) load = 0;
    checks++;
    if (state != {1'b1, seed, 1'b1}) begin failures++; $display("seed state %h", state); end
    i = 0;
    while (i < n) begin
      step = ($urandom % 5 != 0);
      checks++;
      if (prng_out != ref_bits[i]) begin
        failures++;
        if (failures < 10) $display("seed %h bit %0d got %0d", seed, i, prng_out);
      end
      @(negedge clk);
      if (step) i++;
    end
    step = 0;
  endtask

  initial begin
    #1 rst_n = 0;   // reset edge before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(23'h0, 500);
    run(23'h7fffff, 500);
    run(23'h2a5c31, 2000);
    for (int k = 0; k < 5; k++) run(23'($urandom), 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
