// tb_uspe: self-checking test of one processing element.
//
// Runs three kinds of dot products with small integer operands (exact in FP16
// and FP32, so results are compared bit for bit with integer sums computed
// here): OS dense 2:2 with interleaved accumulation over several groups, OS
// 2:8 sparse with indexes from the north, WS 2:8 sparse and WS 1:8 sparse with
// preloaded stationary values and a north partial sum. It also checks the WS
// latency from the first west group to the south partial sum.
module tb_uspe;
  import sat_fp_pkg::*;
  localparam int N = 2, M = 8, I = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mode_ws, ws_load, os_pop;
  logic [1:0] n_cfg;
  logic w_valid, w_first, w_last;
  fp16_t [M-1:0] w_data;
  fp16_t n_data; logic [2:0] n_idx; fp32_t n_psum;
  logic e_valid, e_first, e_last; fp16_t [M-1:0] e_data;
  fp16_t s_data; logic [2:0] s_idx; fp32_t s_psum; logic s_pv;

  uspe #(.N(N), .M(M)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic fp16_t i2h(int v);
    return fp32_to_fp16(i2f(v));
  endfunction
  function automatic fp32_t i2f(int v);
    // double -> single bits, round to nearest even (no subnormals needed here)
    logic [63:0] d; logic [10:0] e; logic [24:0] m; int e32;
    d = $realtobits(v);
    e = d[62:52];
    if (e == 0) return {d[63], 31'd0};
    e32 = int'(e) - 1023 + 127;
    m = {2'b01, d[51:29]};
    if (d[28] && (|d[27:0] || d[29])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e32++; end
    if (e32 >= 255) return {d[63], 8'hff, 23'd0};
    if (e32 <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e32), m[22:0]};
  endfunction

  task automatic check(string what, fp32_t got, int exp);
    checks++;
    if (got !== i2f(exp)) begin
      failures++;
      $display("FAIL %s: got %h exp %0d (%h)", what, got, exp, i2f(exp));
    end
  endtask

  task automatic idle();
    w_valid = 0; w_first = 0; w_last = 0; ws_load = 0; os_pop = 0;
    n_psum = '0; n_data = '0; n_idx = '0;
  endtask

  // ---------------- OS test ----------------
  int X [I][32];
  int Y [32];
  int Yi[32];
  task automatic run_os(bit sparse, int G);
    int exp [I];
    mode_ws = 0; n_cfg = 2'(N);
    for (int r = 0; r < I; r++) for (int j = 0; j < G*M; j++) X[r][j] = $urandom_range(0, 8) - 4;
    for (int j = 0; j < G*N; j++) begin
      Y[j]  = $urandom_range(0, 6) - 3;
      Yi[j] = sparse ? ((j % N) * 4 + $urandom_range(0, 3)) : (j % N);
    end
    for (int r = 0; r < I; r++) begin
      exp[r] = 0;
      for (int g = 0; g < G; g++) for (int k = 0; k < N; k++)
        exp[r] += X[r][g*M + Yi[g*N+k]] * Y[g*N+k];
    end
    for (int g = 0; g < G; g++) for (int k = 0; k < N; k++) for (int s = 0; s < I; s++) begin
      @(negedge clk);
      w_valid = 1; w_first = (g == 0); w_last = (g == G-1);
      for (int j = 0; j < M; j++) w_data[j] = i2h(X[s][g*M + j]);
      n_data = i2h(Y[g*N+k]); n_idx = 3'(Yi[g*N+k]);
    end
    @(negedge clk); idle();
    repeat (10) @(negedge clk);
    for (int s = 0; s < I; s++) begin
      os_pop = 1;
      #1 check($sformatf("OS %s slot %0d", sparse ? "sparse" : "dense", s), s_psum, exp[s]);
      @(negedge clk);
    end
    os_pop = 0;
  endtask

  // ---------------- WS test ----------------
  task automatic run_ws(int n, int blocks);
    int wv [N]; int wi [N];
    int A [64][M]; int P [64]; int exp [64];
    int t0, got_n; int lat_first;
    int sched_psum [int];
    mode_ws = 1; n_cfg = 2'(n);
    for (int k = 0; k < n; k++) begin wv[k] = $urandom_range(0, 6) - 3; wi[k] = $urandom_range(0, M-1); end
    // preload: last loaded entry ends in stat[0] (k = 0)
    for (int k = n-1; k >= 0; k--) begin
      @(negedge clk); ws_load = 1; n_data = i2h(wv[k]); n_idx = 3'(wi[k]);
    end
    @(negedge clk); idle();
    for (int b = 0; b < blocks*I; b++) begin
      P[b] = $urandom_range(0, 20) - 10; exp[b] = P[b];
      for (int j = 0; j < M; j++) A[b][j] = $urandom_range(0, 8) - 4;
      for (int k = 0; k < n; k++) exp[b] += A[b][wi[k]] * wv[k];
    end
    got_n = 0; lat_first = -1;
    t0 = cyc;
    fork
      begin
        int tt;
        tt = 0;
        for (int blk = 0; blk < blocks; blk++) for (int k = 0; k < n; k++) for (int s = 0; s < I; s++) begin
          @(negedge clk);
          w_valid = 1; w_first = 0; w_last = 0;
          for (int j = 0; j < M; j++) w_data[j] = i2h(A[blk*I+s][j]);
          if (k == 0) sched_psum[tt + 4] = blk*I + s;
          tt++;
          if (sched_psum.exists(tt - 1)) n_psum = i2f(P[sched_psum[tt-1]]); else n_psum = '0;
        end
        for (int e = 0; e < 12; e++) begin
          @(negedge clk); w_valid = 0;
          tt++;
          if (sched_psum.exists(tt - 1)) n_psum = i2f(P[sched_psum[tt-1]]); else n_psum = '0;
        end
      end
      begin
        while (got_n < blocks*I && cyc < t0 + 200) begin
          @(posedge clk);
          if (s_pv) begin
            if (lat_first < 0) lat_first = cyc - t0;
            check($sformatf("WS n=%0d row %0d", n, got_n), s_psum, exp[got_n]);
            got_n++;
          end
        end
      end
    join
    checks++;
    if (got_n != blocks*I) begin failures++; $display("FAIL WS: got %0d results", got_n); end
    // latency from the first west group at the input to the south psum:
    // 1 input register + (n-1)*I + MUL_LAT + ADD_LAT + 1 output register,
    // plus one cycle because the first group is driven one cycle after t0
    checks++;
    if (lat_first != 1 + 1 + (n-1)*I + 3 + 3 + 1) begin
      failures++; $display("FAIL WS latency n=%0d: %0d", n, lat_first);
    end
    idle();
  endtask

  initial begin
    idle(); mode_ws = 0; n_cfg = 2; w_data = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_os(0, 3);
    run_os(1, 4);
    run_os(0, 1);
    run_ws(2, 3);
    run_ws(1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
