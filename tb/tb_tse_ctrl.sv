// tb_tse_ctrl: runs the sequencer on its own at reduced sizes, with simple
// models of the units it drives: the min-entropy unit answers a fixed
// number of cycles after it has seen all samples, the output-length unit
// answers one cycle after its start with a chosen m, the Toeplitz string
// generator answers after BS+m cycles, and the extractor array returns
// bits_valid one cycle after shift. Checks: every byte address is read
// once and in order; the seed is the first 23 raw bits; m_force overrides
// and is clamped; the output buffer is written at 0..NW*m-1 in order; the
// extraction takes NW*(m+1)+1 cycles from the first batch load; done
// pulses once; a computed m of 0 writes nothing.
module tb_tse_ctrl;
  import tse_ctrl_pkg::*;
  localparam int unsigned S_BITS = 512, L = 128, SW = 8, M_MAX = 9, BS = 16;
  localparam int unsigned NW = S_BITS / L, NBY = L / SW;
  localparam int unsigned MW = $clog2(M_MAX + 1);
  localparam int unsigned OAW = $clog2(NW * M_MAX);

  logic clk = 0, rst_n = 1, start = 0;
  logic [MW-1:0] m_force = '0;
  logic busy, done;
  phase_t phase;
  logic brd_en, wrd_en;
  logic [$clog2(NW)-1:0] brd_word, wrd_word;
  logic [$clog2(NBY)-1:0] brd_byte;
  logic [SW-1:0] brd_data;
  logic me_start, me_valid, me_done;
  logic [SW-1:0] me_data;
  logic ol_start, ol_done;
  logic [MW-1:0] ol_m, m_sel;
  logic tg_start, tg_done;
  logic [22:0] raw_seed;
  logic arr_load, arr_shift, arr_valid;
  logic ob_we;
  logic [OAW-1:0] ob_waddr;
  logic [$clog2(NW*M_MAX+1)-1:0] out_words;
  int checks = 0, failures = 0;

  tse_ctrl #(.S_BITS(S_BITS), .L(L), .SW(SW), .M_MAX(M_MAX)) dut (.*);

  always #5 clk = ~clk;

  // Sample memory model: byte value is a function of its address.
  function automatic logic [7:0] byte_at(int w, int o);
    return 8'((w * 37 + o * 11 + 5) ^ (o << 3));
  endfunction
  always_ff @(posedge clk) if (brd_en) brd_data <= byte_at(int'(brd_word), int'(brd_byte));

  // Unit models.
  int me_seen, tg_cnt;
  logic [MW-1:0] calc_m;
  always @(posedge clk) begin
    me_done <= 1'b0; ol_done <= 1'b0; tg_done <= 1'b0;
    if (me_start) me_seen <= 0;
    else if (me_valid) me_seen <= me_seen + 1;
    if (me_seen == int'(S_BITS / SW)) me_seen <= -1;   // all seen
    if (ol_start) ol_done <= 1'b1;
    if (tg_start) tg_cnt <= int'(BS) + int'(m_sel);
    else if (tg_cnt > 0) begin
      tg_cnt <= tg_cnt - 1;
      if (tg_cnt == 1) tg_done <= 1'b1;
    end
    arr_valid <= arr_shift;
  end
  // me_done: 5 cycles after the last sample was seen.
  int me_wait;
  always @(posedge clk) begin
    if (me_seen == int'(S_BITS / SW)) me_wait <= 5;
    else if (me_wait > 0) begin
      me_wait <= me_wait - 1;
      if (me_wait == 1) me_done <= 1'b1;
    end
  end
  assign ol_m = calc_m;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int mcalc, input int mforce, input int mexp);
    int nrd, nw_next, ext_cycles, ndone;
    bit in_ext, order_ok;
    logic [23:0] first3;
    calc_m  = MW'(mcalc);
    m_force = MW'(mforce);
    nrd = 0; nw_next = 0; ext_cycles = 0; ndone = 0; in_ext = 0; order_ok = 1;
    me_seen = 0; me_wait = 0; tg_cnt = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (ndone == 0) begin
      if (brd_en) begin
        if (int'(brd_word) * int'(NBY) + int'(brd_byte) != nrd) order_ok = 0;
        nrd++;
      end
      if (ob_we) begin
        if (int'(ob_waddr) != nw_next) order_ok = 0;
        nw_next++;
      end
      in_ext = (phase inside {PH_LOAD, PH_COMPUTE, PH_FINAL});
      if (in_ext) ext_cycles++;
      if (done) ndone++;
      @(negedge clk);
    end
    repeat (5) begin if (done) ndone++; @(negedge clk); end
    first3 = {byte_at(0, 2), byte_at(0, 1), byte_at(0, 0)};
    checks += 7;
    if (nrd != int'(S_BITS / SW)) begin failures++; $display("reads %0d", nrd); end
    if (!order_ok) begin failures++; $display("address order"); end
    if (int'(m_sel) != mexp) begin failures++; $display("m_sel %0d exp %0d", m_sel, mexp); end
    if (nw_next != int'(NW) * mexp) begin failures++; $display("writes %0d", nw_next); end
    if (int'(out_words) != int'(NW) * mexp) begin failures++; $display("out_words %0d", out_words); end
    if (raw_seed != first3[22:0]) begin failures++; $display("seed %h", raw_seed); end
    if (ndone != 1) begin failures++; $display("done pulses %0d", ndone); end
    if (mexp > 0) begin
      checks++;
      if (ext_cycles != int'(NW) * (mexp + 1) + 1) begin
        failures++; $display("extraction cycles %0d expected %0d", ext_cycles, int'(NW) * (mexp + 1) + 1);
      end
    end
  endtask

  initial begin
    #1 rst_n = 0;   // reset edge before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 0, 3);
    run(3, 7, 7);
    run(2, 15, M_MAX);
    run(1, 0, 1);
    run(0, 0, 0);
    run(M_MAX, 0, M_MAX);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
