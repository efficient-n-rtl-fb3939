// tb_data_router: self-checking test of the configurable data router.
//
// OS mode: a column pops R*I accumulators bottom row first, slot 0 first; the
// router must give them output rows (R-1-r)*I+s. WS mode: results leave in row
// order and get consecutive rows. Each result is converted to FP16 and
// appears one cycle after its valid. Columns get independent random valid
// patterns; clear restarts the counters between the two modes.
module tb_data_router;
  import sat_fp_pkg::*;
  localparam int R = 4, C = 3, I = 3, AW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, mode_ws = 0;
  fp32_t [C-1:0] s_psum = 0;
  logic [C-1:0] s_pv = 0;
  logic [C-1:0] we;
  logic [C-1:0][AW-1:0] row;
  fp16_t [C-1:0] data;
  data_router #(.R(R), .C(C), .I(I), .AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  int cnt [C];
  logic [C-1:0] e_we;
  int e_row [C];
  fp16_t e_d [C];

  task automatic run(bit ws, int n_out);
    int sent [C];
    for (int c = 0; c < C; c++) begin cnt[c] = 0; sent[c] = 0; e_we[c] = 0; end
    @(negedge clk); clear = 1; mode_ws = ws; @(negedge clk); clear = 0;
    for (int t = 0; t < 6 * n_out; t++) begin
      @(negedge clk);
      for (int c = 0; c < C; c++) begin
        checks++;
        if (we[c] !== e_we[c] || (e_we[c] && (row[c] !== AW'(e_row[c]) || data[c] !== e_d[c]))) begin
          failures++;
          if (failures < 10) $display("FAIL ws=%0d c%0d we %b row %0d data %h exp %b %0d %h", ws, c, we[c], row[c], data[c], e_we[c], e_row[c], e_d[c]);
        end
        s_pv[c] = (sent[c] < n_out) && ($urandom_range(0, 2) != 0);
        s_psum[c] = {1'b0, 8'($urandom_range(100, 150)), 23'($urandom)};
        e_we[c] = s_pv[c];
        if (s_pv[c]) begin
          e_d[c] = fp32_to_fp16(s_psum[c]);
          e_row[c] = ws ? sent[c] : (R - 1 - sent[c] / I) * I + sent[c] % I;
          sent[c]++;
        end
      end
    end
    for (int c = 0; c < C; c++) begin
      checks++; if (sent[c] != n_out) begin failures++; $display("FAIL column %0d sent %0d", c, sent[c]); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(0, R * I);
    run(1, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
