// tb_stce: self-checking test of the systolic tensor core engine in
// output-stationary mode.
//
// The bench plays the role of the read sequencers: row r receives its stream
// r cycles late and column c its stream c cycles late. Stream item
// q = (g*n + k)*I + s carries the west M-group of output row r*I+s and the
// north (value, index) pair k of group g for column c. After the stream and a
// drain time it pops R*I accumulators per column and checks them, in the
// bottom-row-first order, against integer dot products. Run for a 2:8 sparse
// matmul (n = 2, random indexes) and a dense one (n = 2, index k). A popped result
// is on the south outputs in the same cycle as its pop request.
module tb_stce;
  import sat_fp_pkg::*;
  localparam int R = 3, C = 3, N = 2, M = 8, I = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mode_ws = 0, ws_load = 0, os_pop = 0;
  logic [1:0] n_cfg = 2;
  logic [R-1:0] w_valid = 0, w_first = 0, w_last = 0;
  fp16_t [R-1:0][M-1:0] w_data = 0;
  fp16_t [C-1:0] n_data = 0;
  logic [C-1:0][2:0] n_idx = 0;
  fp32_t [C-1:0] s_psum;
  logic [C-1:0] s_pv;
  stce #(.R(R), .C(C), .N(N), .M(M)) dut (.*);

  function automatic fp32_t i2f(int v);
    logic [63:0] d; logic [10:0] e;
    d = $realtobits(v);
    e = d[62:52];
    if (e == 0) return 32'd0;
    return {d[63], 8'(int'(e) - 1023 + 127), d[51:29]};
  endfunction

  int checks = 0, failures = 0;
  int A [R*I][32];
  int Bv [C][4][N]; int Bi [C][4][N];

  task automatic run(bit dense, int G);
    int L, t0, first_t;
    int got [C][$];
    L = G * N * I;
    for (int o = 0; o < R*I; o++) for (int j = 0; j < G*M; j++) A[o][j] = $urandom_range(0, 8) - 4;
    for (int c = 0; c < C; c++) for (int g = 0; g < G; g++) begin
      Bi[c][g][0] = dense ? 0 : $urandom_range(0, 3);
      Bi[c][g][1] = dense ? 1 : $urandom_range(4, 7);
      for (int k = 0; k < N; k++) Bv[c][g][k] = $urandom_range(0, 8) - 4;
    end
    for (int t = 0; t < L + R + C + 2; t++) begin
      @(negedge clk);
      for (int r = 0; r < R; r++) begin
        int q; q = t - r;
        w_valid[r] = (q >= 0 && q < L);
        if (w_valid[r]) begin
          int g, s;
          g = q / (N*I); s = q % I;
          w_first[r] = (g == 0); w_last[r] = (g == G - 1);
          for (int j = 0; j < M; j++) w_data[r][j] = fp32_to_fp16(i2f(A[r*I+s][g*M+j]));
        end
      end
      for (int c = 0; c < C; c++) begin
        int q; q = t - c;
        if (q >= 0 && q < L) begin
          int g, k;
          g = q / (N*I); k = (q / I) % N;
          n_data[c] = fp32_to_fp16(i2f(Bv[c][g][k])); n_idx[c] = 3'(Bi[c][g][k]);
        end
      end
    end
    w_valid = 0;
    repeat (C + 12) @(negedge clk);
    first_t = -1;
    for (int t = 0; t < R*I + 4; t++) begin
      os_pop = (t < R*I);
      #1;
      for (int c = 0; c < C; c++) if (s_pv[c]) begin
        got[c].push_back(int'(s_psum[c]));
        if (first_t < 0) first_t = t;
      end
      @(negedge clk);
    end
    os_pop = 0;
    checks++; if (first_t != 0) begin failures++; $display("FAIL first pop at %0d", first_t); end
    for (int c = 0; c < C; c++) begin
      checks++;
      if (got[c].size() != R*I) begin failures++; $display("FAIL column %0d popped %0d", c, got[c].size()); end
      else for (int p = 0; p < R*I; p++) begin
        int o, e;
        o = (R - 1 - p / I) * I + p % I;
        e = 0;
        for (int g = 0; g < G; g++) for (int k = 0; k < N; k++)
          e += A[o][g*M + (dense ? k : Bi[c][g][k])] * Bv[c][g][k];
        checks++;
        if (fp32_t'(got[c][p]) !== i2f(e)) begin
          failures++;
          if (failures < 10) $display("FAIL dense=%0d col %0d row %0d got %h exp %h", dense, c, o, got[c][p], i2f(e));
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(0, 3);
    run(1, 2);
    run(0, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
