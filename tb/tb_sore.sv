// tb_sore: self-checking test of the sparse-weight reduction engine (top-K
// sorters and data providers).
//
// Each lane receives a random FP16 stream (with repeated magnitudes, so the
// keep-the-earlier rule on ties is exercised), one element per cycle with
// random gaps. After every M elements the lane must emit the n_cfg largest
// magnitudes of that group, largest first, one per cycle starting 2 cycles
// after the group's last element, each with its position inside the group.
// Run once with n_cfg = 2 (2:8) and once with n_cfg = 1 (1:8).
module tb_sore;
  import sat_fp_pkg::*;
  localparam int L = 4, K = 2, M = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0] n_cfg = 2;
  logic in_valid = 0;
  fp16_t [L-1:0] in_data = 0;
  logic [L-1:0] out_valid;
  fp16_t [L-1:0] out_val;
  logic [L-1:0][2:0] out_idx;
  sore #(.LANES(L), .K(K), .M(M)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  fp16_t grp [L][M];
  int pos = 0;
  // expected outputs per lane: value, index, cycle
  fp16_t qv [L][$]; int qi [L][$]; int qt [L][$];

  always @(negedge clk) if (rst_n) for (int l = 0; l < L; l++) if (out_valid[l]) begin
    checks++;
    if (qv[l].size() == 0) begin failures++; $display("FAIL unexpected output lane %0d", l); end
    else begin
      fp16_t ev; int ei, et;
      ev = qv[l].pop_front(); ei = qi[l].pop_front(); et = qt[l].pop_front();
      if (out_val[l] !== ev || out_idx[l] !== 3'(ei) || cyc != et) begin
        failures++;
        if (failures < 10) $display("FAIL lane %0d got %h/%0d at %0d exp %h/%0d at %0d", l, out_val[l], out_idx[l], cyc, ev, ei, et);
      end
    end
  end

  task automatic run(int n, int groups);
    n_cfg = 3'(n);
    for (int t = 0; t < groups * M; ) begin
      @(negedge clk);
      in_valid = $urandom_range(0, 3) != 0;
      if (in_valid) begin
        for (int l = 0; l < L; l++) begin
          in_data[l] = {1'($urandom), 5'($urandom_range(10, 12)), 10'($urandom_range(0, 3) << 8)};
          grp[l][pos] = in_data[l];
        end
        if (pos == M - 1) begin
          for (int l = 0; l < L; l++) begin
            bit taken [M];
            for (int j = 0; j < M; j++) taken[j] = 0;
            for (int k = 0; k < n; k++) begin
              int bj; bj = -1;
              for (int j = 0; j < M; j++)
                if (!taken[j] && (bj < 0 || grp[l][j][14:0] > grp[l][bj][14:0])) bj = j;
              taken[bj] = 1;
              qv[l].push_back(grp[l][bj]); qi[l].push_back(bj); qt[l].push_back(cyc + 2 + k);
            end
          end
        end
        pos = (pos + 1) % M;
        t++;
      end
      // keep gaps of at least n_cfg cycles between the ends of groups
      if (in_valid && pos == 0) begin @(negedge clk); in_valid = 0; repeat (n) @(negedge clk); end
    end
    @(negedge clk); in_valid = 0;
    repeat (6) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(2, 40);
    run(1, 40);
    for (int l = 0; l < L; l++) begin
      checks++; if (qv[l].size() != 0) begin failures++; $display("FAIL lane %0d missing %0d outputs", l, qv[l].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
