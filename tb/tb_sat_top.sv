// tb_sat_top: end-to-end test of the accelerator.
//
// Acts as host: fills the input and optimizer buffers through the host ports,
// writes task lists, starts the controller and reads the output buffer back.
// Two task lists are run:
//   list A: OS dense 2:2 matmul (buffers half 0), WS 2:8 sparse matmul with
//           weight preload (buffers half 1, output half 1)
//   list B: OS 2:8 sparse matmul (half 0), weight update with N:M reduction of
//           the new weights (pre-generation, half 1)
// Operands are small integers or quarters, so every result is exact in FP16 /
// FP32 and is compared bit for bit with values computed here. The test counts
// how often each mechanism happened (OS pop, WS preload, interleaved slots,
// sparse index selection, dense mode, weight update, reduction output, both
// buffer halves) and counts a failure for any that never did.
module tb_sat_top;
  import sat_fp_pkg::*;
  import sat_pkg::*;

  localparam int R = 4, C = 4, N = 2, M = 8, DEPTH = 64, I = 3;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0; logic [3:0] cfg_addr = 0; cfg_word_t cfg_wdata = '0;
  logic start = 0, busy, done;
  logic w2e_we = 0; logic [$clog2(R)-1:0] w2e_bank = 0; logic [AW:0] w2e_addr = 0; logic [M*16-1:0] w2e_data = 0;
  logic n2s_we = 0; logic [$clog2(C)-1:0] n2s_bank = 0; logic [AW:0] n2s_addr = 0; logic [18:0] n2s_data = 0;
  logic opt_we = 0; logic [$clog2(C)-1:0] opt_bank = 0; logic [AW:0] opt_addr = 0; logic [79:0] opt_data = 0;
  logic out_re = 0; logic [$clog2(C)-1:0] out_bank = 0; logic [AW:0] out_addr = 0; logic [63:0] out_rdata;

  sat_top #(.R(R), .C(C), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;

  function automatic fp32_t r2f(real v);
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
  function automatic fp16_t r2h(real v);
    return fp32_to_fp16(r2f(v));
  endfunction

  task automatic expect64(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  // ---------------- host port helpers ----------------
  task automatic wr_w2e(int bank, int half, int addr, logic [M*16-1:0] d);
    @(negedge clk); w2e_we = 1; w2e_bank = bank[$clog2(R)-1:0]; w2e_addr = {half[0], AW'(addr)}; w2e_data = d;
    @(negedge clk); w2e_we = 0;
  endtask
  task automatic wr_n2s(int bank, int half, int addr, int idx, fp16_t v);
    @(negedge clk); n2s_we = 1; n2s_bank = bank[$clog2(C)-1:0]; n2s_addr = {half[0], AW'(addr)}; n2s_data = {3'(idx), v};
    @(negedge clk); n2s_we = 0;
  endtask
  task automatic wr_opt(int bank, int half, int addr, logic [79:0] d);
    @(negedge clk); opt_we = 1; opt_bank = bank[$clog2(C)-1:0]; opt_addr = {half[0], AW'(addr)}; opt_data = d;
    @(negedge clk); opt_we = 0;
  endtask
  task automatic rd_out(int bank, int half, int addr, output logic [63:0] d);
    @(negedge clk); out_re = 1; out_bank = bank[$clog2(C)-1:0]; out_addr = {half[0], AW'(addr)};
    @(negedge clk); out_re = 0; d = out_rdata;
  endtask
  task automatic set_cfg(int a, cfg_word_t w);
    @(negedge clk); cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = w;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic run_list(output int cycles);
    int t;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t = 0;
    while (!done && t < 200000) begin @(posedge clk); t++; end
    cycles = t;
  endtask

  // ---------------- mechanism counters ----------------
  int n_pop = 0, n_preload = 0, n_slot2 = 0, n_wu = 0, n_sore = 0, n_ws_out = 0;
  int n_sparse_idx = 0, n_dense = 0;
  bit half_used [2];
  always @(posedge clk) begin
    if (dut.os_pop) n_pop++;
    if (dut.u_stce.ws_load) n_preload++;
    if (dut.u_stce.g_r[0].g_c[0].u_pe.v_q && dut.u_stce.g_r[0].g_c[0].u_pe.slot_q == 2) n_slot2++;
    if (dut.u_valid) n_wu++;
    if (dut.z_valid[0]) n_sore++;
    if (dut.cfg_q.df == DF_WS && dut.s_pv[0]) n_ws_out++;
    if (dut.u_stce.g_r[0].g_c[0].u_pe.v_q && dut.u_stce.g_r[0].g_c[0].u_pe.sel_idx > 1) n_sparse_idx++;
    if (dut.u_stce.g_r[0].g_c[0].u_pe.v_q && dut.cfg_q.df == DF_OS && dut.cfg_q.cnt == 3) n_dense++;
    if (dut.busy && dut.cfg_q.op != OP_END) half_used[dut.cfg_q.in_half] = 1'b1;
  end

  // ---------------- data ----------------
  int A  [R*I][64];        // OS activations, rows x K
  int Bv [64][C];          // OS dense weights
  int Sv [C][8][N];        // OS sparse weights: column, group, k
  int Si [C][8][N];
  int X  [64][R*M];        // WS activations
  int Wv [R][C][N];        // WS stationary weights
  int Wi [R][C][N];

  function automatic logic [63:0] h64(int v);
    return {48'd0, r2h(real'(v))};
  endfunction

  initial begin
    cfg_word_t w;
    logic [63:0] d;
    logic [M*16-1:0] grp;
    int G, NB, cyc, L;
    repeat (3) @(negedge clk); rst_n = 1;

    // ======== list A, task 0: OS dense (n = N, dense index k) ========
    G = 3;
    for (int o = 0; o < R*I; o++) for (int kk = 0; kk < G*N; kk++) A[o][kk] = $urandom_range(0, 6) - 3;
    for (int kk = 0; kk < G*N; kk++) for (int c = 0; c < C; c++) Bv[kk][c] = $urandom_range(0, 6) - 3;
    for (int r = 0; r < R; r++) for (int g = 0; g < G; g++) for (int s = 0; s < I; s++) begin
      grp = '0;
      for (int j = 0; j < N; j++) grp[16*j +: 16] = r2h(real'(A[r*I+s][g*N+j]));
      wr_w2e(r, 0, g*I + s, grp);
    end
    for (int c = 0; c < C; c++) for (int g = 0; g < G; g++) for (int k = 0; k < N; k++)
      wr_n2s(c, 0, g*N + k, k, r2h(real'(Bv[g*N+k][c])));
    w = '0; w.op = OP_MM; w.df = DF_OS; w.n = 3'(N); w.cnt = 12'(G); w.in_half = 0; w.out_half = 0; w.out_base = 0;
    set_cfg(0, w);

    // ======== list A, task 1: WS 2:8 sparse, half 1 ========
    NB = 2;
    for (int b = 0; b < NB*I; b++) for (int j = 0; j < R*M; j++) X[b][j] = $urandom_range(0, 6) - 3;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      Wi[r][c][0] = $urandom_range(0, 3); Wi[r][c][1] = $urandom_range(4, 7);
      for (int k = 0; k < N; k++) Wv[r][c][k] = $urandom_range(0, 6) - 3;
    end
    for (int r = 0; r < R; r++) for (int b = 0; b < NB*I; b++) begin
      for (int j = 0; j < M; j++) grp[16*j +: 16] = r2h(real'(X[b][r*M+j]));
      wr_w2e(r, 1, b, grp);
    end
    for (int c = 0; c < C; c++) for (int r = 0; r < R; r++) for (int k = 0; k < N; k++)
      wr_n2s(c, 1, r*N + k, Wi[r][c][k], r2h(real'(Wv[r][c][k])));
    w = '0; w.op = OP_MM; w.df = DF_WS; w.n = 3'(N); w.cnt = 12'(NB); w.in_half = 1; w.out_half = 1; w.out_base = 0;
    set_cfg(1, w);
    w = '0; w.op = OP_END; set_cfg(2, w);

    run_list(cyc);
    $display("list A done after %0d cycles", cyc);
    checks++; if (cyc >= 200000) begin failures++; $display("FAIL list A timeout"); end

    for (int c = 0; c < C; c++) for (int o = 0; o < R*I; o++) begin
      int e; e = 0;
      for (int kk = 0; kk < G*N; kk++) e += A[o][kk] * Bv[kk][c];
      rd_out(c, 0, o, d);
      expect64($sformatf("OS dense r%0d c%0d", o, c), d, h64(e));
    end
    for (int c = 0; c < C; c++) for (int b = 0; b < NB*I; b++) begin
      int e; e = 0;
      for (int r = 0; r < R; r++) for (int k = 0; k < N; k++) e += X[b][r*M + Wi[r][c][k]] * Wv[r][c][k];
      rd_out(c, 1, b, d);
      expect64($sformatf("WS sparse b%0d c%0d", b, c), d, h64(e));
    end

    // ======== list B, task 0: OS 2:8 sparse, half 0, output at DEPTH/4 ========
    G = 2;
    for (int o = 0; o < R*I; o++) for (int kk = 0; kk < G*M; kk++) A[o][kk] = $urandom_range(0, 6) - 3;
    for (int c = 0; c < C; c++) for (int g = 0; g < G; g++) begin
      Si[c][g][0] = $urandom_range(0, 3); Si[c][g][1] = $urandom_range(4, 7);
      for (int k = 0; k < N; k++) Sv[c][g][k] = $urandom_range(0, 6) - 3;
    end
    for (int r = 0; r < R; r++) for (int g = 0; g < G; g++) for (int s = 0; s < I; s++) begin
      for (int j = 0; j < M; j++) grp[16*j +: 16] = r2h(real'(A[r*I+s][g*M+j]));
      wr_w2e(r, 0, g*I + s, grp);
    end
    for (int c = 0; c < C; c++) for (int g = 0; g < G; g++) for (int k = 0; k < N; k++)
      wr_n2s(c, 0, g*N + k, Si[c][g][k], r2h(real'(Sv[c][g][k])));
    w = '0; w.op = OP_MM; w.df = DF_OS; w.n = 3'(N); w.cnt = 12'(G); w.in_half = 0; w.out_half = 0;
    w.out_base = 12'(DEPTH/4);
    set_cfg(0, w);

    // ======== list B, task 1: weight update + 2:8 reduction ========
    L = 2*M;
    begin
      real gq [C][64]; real vq [C][64]; real wq [C][64];
      real vn, wn;
      for (int l = 0; l < C; l++) for (int j = 0; j < L; j++) begin
        gq[l][j] = real'($urandom_range(0, 16)) - 8.0;
        vq[l][j] = real'($urandom_range(0, 16)) - 8.0;
        // distinct magnitudes inside each lane so the kept set is unique
        wq[l][j] = (j % 2 == 0 ? 1.0 : -1.0) * real'(64 + 8*j + l);
        wr_opt(l, 1, j, {r2h(gq[l][j]), r2f(vq[l][j]), r2f(wq[l][j])});
      end
      w = '0; w.op = OP_WU; w.cnt = 12'(L); w.in_half = 1; w.out_half = 1;
      w.out_base = 12'(DEPTH/4); w.sore_base = 12'(DEPTH/2); w.sore_en = 1; w.sore_n = 3'(N);
      w.s = r2f(1.0); w.mu = r2f(0.5); w.lr = r2f(-0.25);
      set_cfg(1, w);
      w = '0; w.op = OP_END; set_cfg(2, w);

      run_list(cyc);
      $display("list B done after %0d cycles", cyc);
      checks++; if (cyc >= 200000) begin failures++; $display("FAIL list B timeout"); end

      for (int c = 0; c < C; c++) for (int o = 0; o < R*I; o++) begin
        int e; e = 0;
        for (int g = 0; g < G; g++) for (int k = 0; k < N; k++) e += A[o][g*M + Si[c][g][k]] * Sv[c][g][k];
        rd_out(c, 0, DEPTH/4 + o, d);
        expect64($sformatf("OS sparse r%0d c%0d", o, c), d, h64(e));
      end
      for (int l = 0; l < C; l++) begin
        real wn_all [64];
        for (int j = 0; j < L; j++) begin
          vn = 0.5 * vq[l][j] + gq[l][j];
          wn = wq[l][j] - 0.25 * vn;
          wn_all[j] = wn;
          rd_out(l, 1, DEPTH/4 + j, d);
          expect64($sformatf("WU lane %0d word %0d", l, j), d, {r2f(vn), r2f(wn)});
        end
        for (int g = 0; g < L/M; g++) begin
          int best [N];
          bit taken [M];
          for (int j = 0; j < M; j++) taken[j] = 0;
          for (int k = 0; k < N; k++) begin
            int bj; real bm; bj = -1; bm = -1.0;
            for (int j = 0; j < M; j++)
              if (!taken[j] && (wn_all[g*M+j] < 0 ? -wn_all[g*M+j] : wn_all[g*M+j]) > bm) begin
                bm = (wn_all[g*M+j] < 0 ? -wn_all[g*M+j] : wn_all[g*M+j]); bj = j;
              end
            taken[bj] = 1; best[k] = bj;
            rd_out(l, 1, DEPTH/2 + g*N + k, d);
            expect64($sformatf("SORE lane %0d group %0d k %0d", l, g, k), d,
                     {32'd0, 16'(bj), r2h(wn_all[g*M+bj])});
          end
        end
      end
    end

    // ---------------- mechanisms ----------------
    $display("mechanisms: pop=%0d preload=%0d slot2=%0d ws_out=%0d sparse_idx=%0d dense=%0d wu=%0d sore=%0d half0=%0d half1=%0d",
             n_pop, n_preload, n_slot2, n_ws_out, n_sparse_idx, n_dense, n_wu, n_sore, half_used[0], half_used[1]);
    checks++; if (n_pop == 0)        begin failures++; $display("FAIL no OS pop"); end
    checks++; if (n_preload == 0)    begin failures++; $display("FAIL no WS preload"); end
    checks++; if (n_slot2 == 0)      begin failures++; $display("FAIL no interleaved slot"); end
    checks++; if (n_ws_out == 0)     begin failures++; $display("FAIL no WS output"); end
    checks++; if (n_sparse_idx == 0) begin failures++; $display("FAIL no sparse index"); end
    checks++; if (n_dense == 0)      begin failures++; $display("FAIL no dense task"); end
    checks++; if (n_wu == 0)         begin failures++; $display("FAIL no weight update"); end
    checks++; if (n_sore == 0)       begin failures++; $display("FAIL no reduction output"); end
    checks++; if (!half_used[0] || !half_used[1]) begin failures++; $display("FAIL one buffer half unused"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
