// tb_sat_ctrl: self-checking test of the controller FSM.
//
// The bench writes a four-entry task list (OS matmul, WS matmul, weight update,
// end), starts it and models the read sequencers by answering each generator
// start with a done pulse a random number of cycles later. It checks the order
// and kind of generator starts, that cfg_q holds the fetched word, that the
// preload phase covers the north preload, that exactly R*I pop cycles follow
// the OS drain time, that each task's length from its clear pulse matches the
// expected schedule, and that done pulses once with busy falling after it.
module tb_sat_ctrl;
  import sat_pkg::*;
  localparam int R = 4, C = 4, M = 8, I = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0; logic [3:0] cfg_addr = 0; cfg_word_t cfg_wdata = '0;
  logic start = 0, busy, done, clear, pre_phase, os_pop;
  cfg_word_t cfg_q;
  logic wgen_start, ngen_start, ogen_start;
  logic [2:0] wgen_kind, ngen_kind, wgen_skew, ngen_skew;
  logic wgen_done = 0, ngen_done = 0, ogen_done = 0;
  sat_ctrl #(.R(R), .C(C), .M(M), .I(I)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // generator models: done some cycles after start
  int wd = -1, nd = -1, od = -1, wlen, nlen, olen;
  always @(posedge clk) begin
    wgen_done <= (wd == 0); ngen_done <= (nd == 0); ogen_done <= (od == 0);
    if (wd >= 0) wd <= wd - 1;
    if (nd >= 0) nd <= nd - 1;
    if (od >= 0) od <= od - 1;
    if (wgen_start) wd <= wlen;
    if (ngen_start) nd <= nlen;
    if (ogen_start) od <= olen;
  end

  // event log
  string ev [$];
  int n_pop = 0, n_pre = 0, n_done = 0, t_clear [$];
  always @(posedge clk) if (rst_n) begin
    if (wgen_start) ev.push_back($sformatf("w%0d", wgen_kind));
    if (ngen_start) ev.push_back($sformatf("n%0d", ngen_kind));
    if (ogen_start) ev.push_back("o");
    if (os_pop) n_pop++;
    if (pre_phase) n_pre++;
    if (done) n_done++;
    if (clear) t_clear.push_back(cyc);
  end

  initial begin
    cfg_word_t w;
    int t_start, t_done;
    wlen = $urandom_range(5, 20); nlen = $urandom_range(5, 20); olen = $urandom_range(5, 20);
    repeat (2) @(negedge clk); rst_n = 1;
    w = '0; w.op = OP_MM; w.df = DF_OS; w.n = 2; w.cnt = 3;
    @(negedge clk); cfg_we = 1; cfg_addr = 0; cfg_wdata = w;
    w.df = DF_WS; w.cnt = 5;
    @(negedge clk); cfg_addr = 1; cfg_wdata = w;
    w = '0; w.op = OP_WU; w.cnt = 16;
    @(negedge clk); cfg_addr = 2; cfg_wdata = w;
    w = '0; w.op = OP_END;
    @(negedge clk); cfg_addr = 3; cfg_wdata = w;
    @(negedge clk); cfg_we = 0; start = 1; t_start = cyc;
    @(negedge clk); start = 0;
    while (!done && cyc < t_start + 5000) begin
      @(negedge clk);
    end
    t_done = cyc;
    repeat (2) @(negedge clk);
    chk("done pulses", n_done, 1);
    chk("busy low after done", busy, 0);
    chk("event count", ev.size(), 5);
    if (ev.size() == 5) begin
      checks++;
      if (!(ev[0] == $sformatf("w%0d", GEN_OS_W) && ev[1] == $sformatf("n%0d", GEN_OS_N) || ev[0] == $sformatf("n%0d", GEN_OS_N) && ev[1] == $sformatf("w%0d", GEN_OS_W)))
        begin failures++; $display("FAIL OS starts %s %s", ev[0], ev[1]); end
      checks++; if (ev[2] != $sformatf("n%0d", GEN_PRE)) begin failures++; $display("FAIL preload start %s", ev[2]); end
      checks++; if (ev[3] != $sformatf("w%0d", GEN_WS_W)) begin failures++; $display("FAIL WS start %s", ev[3]); end
      checks++; if (ev[4] != "o") begin failures++; $display("FAIL WU start %s", ev[4]); end
    end
    chk("pop cycles", n_pop, R * I);
    // preload: from DECODE->PRE until the WS west start (generator time + 1 + 3 wait cycles)
    chk("preload cycles", n_pre, nlen + 2 + 4);
    chk("clear pulses", t_clear.size(), 4);
    if (t_clear.size() == 4) begin
      // fetch + decode, run until the generator's done (its latency + 3), drain, pop, flush, next
    // OS: decode, run until wgen done, drain C+3+3+6+1, pop R*I, flush 4, next
      chk("OS task length", t_clear[1] - t_clear[0], 1 + (wlen + 3) + (C + 12 + 1) + R*I + 4 + 1 + 1);
      chk("WS task length", t_clear[2] - t_clear[1], 1 + (nlen + 3) + 3 + (wlen + 3) + (C + 3 + 14 + 1) + 1 + 1);
      chk("WU task length", t_clear[3] - t_clear[2], 1 + (olen + 3) + (16 + M + 1) + 1 + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
