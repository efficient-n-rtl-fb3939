// tb_sys_data_gen: self-checking test of the systolic data generator.
//
// For every sequence kind and a few random n / cnt / skew values the bench
// records each lane's read enable and address stream and compares it with a
// reference list: lane 0 starts the cycle after start, lane l is lane 0
// delayed by l*skew cycles. It also checks that dv/first/last follow the reads
// by one cycle and that done pulses right after the last lane's last read.
module tb_sys_data_gen;
  import sat_pkg::*;
  localparam int LANES = 4, AW = 8, DMAX = 7, I = 3, PRE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [2:0] kind = 0, n = 1;
  logic [11:0] cnt = 1;
  logic [2:0] skew = 0;
  logic [LANES-1:0] rd_en, dv, first, last;
  logic [LANES-1:0][AW-1:0] rd_addr;
  logic done;
  sys_data_gen #(.LANES(LANES), .AW(AW), .DMAX(DMAX), .I(I), .PRE(PRE)) dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  task automatic run(logic [2:0] k, int nn, int cc, int sk);
    int ref_a [$]; int ref_f [$]; int ref_l [$];
    int len, t_done, t;
    logic [LANES-1:0] f_q, l_q, en_q;
    // reference base sequence
    if (k == GEN_PRE) for (int j = 0; j < PRE*nn; j++) begin ref_a.push_back(PRE*nn-1-j); ref_f.push_back(1); ref_l.push_back(cc == 1); end
    else if (k == GEN_LIN) for (int j = 0; j < cc; j++) begin ref_a.push_back(j); ref_f.push_back(1); ref_l.push_back(cc == 1); end
    else for (int g = 0; g < cc; g++) for (int kk = 0; kk < nn; kk++) for (int s = 0; s < I; s++) begin
      ref_a.push_back(k == GEN_OS_N ? g*nn + kk : g*I + s);
      ref_f.push_back(g == 0); ref_l.push_back(g == cc - 1);
    end
    len = ref_a.size();
    // the skew chain must be empty before a new skew value is applied
    repeat (DMAX + 2) @(negedge clk);
    @(negedge clk); start = 1; kind = k; n = 3'(nn); cnt = 12'(cc); skew = 3'(sk);
    @(negedge clk); start = 0;
    t_done = -1; en_q = 0;
    // t = cycles after the start edge; lane l reads item t - l*sk
    for (t = 1; t < len + LANES*sk + 4; t++) begin
      for (int l = 0; l < LANES; l++) begin
        int q; q = t - 1 - l*sk;
        chk($sformatf("k%0d en l%0d t%0d", k, l, t), rd_en[l], (q >= 0 && q < len));
        if (q >= 0 && q < len) chk($sformatf("k%0d addr l%0d t%0d", k, l, t), rd_addr[l], ref_a[q]);
        chk("dv follows rd_en", dv[l], en_q[l]);
        if (en_q[l] && k != GEN_PRE && k != GEN_LIN) begin
          chk("first", first[l], f_q[l]); chk("last", last[l], l_q[l]);
        end
      end
      if (done) t_done = t;
      for (int l = 0; l < LANES; l++) begin
        int q; q = t - 1 - l*sk;
        en_q[l] = rd_en[l];
        f_q[l] = (q >= 0 && q < len) ? ref_f[q] : 0;
        l_q[l] = (q >= 0 && q < len) ? ref_l[q] : 0;
      end
      @(negedge clk);
    end
    chk($sformatf("done cycle kind %0d", k), t_done, len + (LANES-1)*sk + 1);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(GEN_OS_W, 2, 3, 1);
    run(GEN_OS_N, 2, 3, 1);
    run(GEN_OS_N, 1, 4, 0);
    run(GEN_WS_W, 2, 2, 7);
    run(GEN_WS_W, 1, 3, 4);
    run(GEN_PRE, 2, 1, 0);
    run(GEN_LIN, 1, 10, 0);
    for (int r = 0; r < 6; r++)
      run(3'($urandom_range(0, 4)), $urandom_range(1, 2), $urandom_range(1, 5), $urandom_range(0, 7));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
