// tb_out_sched: self-checking test of the output data scheduler.
//
// Drives random router writes, weight-update results and reduction outputs per
// lane and checks, one cycle later, the output-buffer write ports: router rows
// and update words share port a (router first, update counter advances only
// when the update word is written), reduction words use port b at sore_base
// plus a running count, all in the selected output half. clear restarts the
// counters.
module tb_out_sched;
  import sat_fp_pkg::*;
  localparam int L = 4, AW = 6, IW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, out_half = 0;
  logic [11:0] out_base = 0, sore_base = 0;
  logic [L-1:0] r_we = 0, z_valid = 0; logic u_valid = 0;
  logic [L-1:0][AW-1:0] r_row = 0;
  fp16_t [L-1:0] r_data = 0, z_val = 0;
  fp32_t [L-1:0] u_v = 0, u_w = 0;
  logic [L-1:0][IW-1:0] z_idx = 0;
  logic [L-1:0] we_a, we_b;
  logic [L-1:0][AW:0] addr_a, addr_b;
  logic [L-1:0][63:0] wdata_a, wdata_b;
  out_sched #(.LANES(L), .AW(AW), .IW(IW)) dut (.*);

  int checks = 0, failures = 0;
  int ucnt [L], zcnt [L];
  logic [L-1:0] e_wea, e_web;
  logic [L-1:0][AW:0] e_aa, e_ab;
  logic [L-1:0][63:0] e_da, e_db;

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int l = 0; l < L; l++) begin ucnt[l] = 0; zcnt[l] = 0; end
    out_base = 12'd5; sore_base = 12'd40; out_half = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      if (t > 0) for (int l = 0; l < L; l++) begin
        chk("we_a", 64'(we_a[l]), 64'(e_wea[l]));
        chk("we_b", 64'(we_b[l]), 64'(e_web[l]));
        if (e_wea[l]) begin chk("addr_a", 64'(addr_a[l]), 64'(e_aa[l])); chk("data_a", wdata_a[l], e_da[l]); end
        if (e_web[l]) begin chk("addr_b", 64'(addr_b[l]), 64'(e_ab[l])); chk("data_b", wdata_b[l], e_db[l]); end
      end
      clear = (t == 200);
      if (t == 200) out_half = 0;
      u_valid = $urandom_range(0, 1);
      for (int l = 0; l < L; l++) begin
        r_we[l] = ($urandom_range(0, 3) == 0); r_row[l] = AW'($urandom_range(0, 20));
        r_data[l] = 16'($urandom); u_v[l] = $urandom; u_w[l] = $urandom;
        z_valid[l] = $urandom_range(0, 1); z_val[l] = 16'($urandom); z_idx[l] = IW'($urandom);
      end
      for (int l = 0; l < L; l++) begin
        if (clear) begin
          e_wea[l] = 0; e_web[l] = 0; ucnt[l] = 0; zcnt[l] = 0;
        end else begin
          e_wea[l] = r_we[l] || u_valid;
          if (r_we[l]) begin
            e_aa[l] = {out_half, AW'(out_base) + r_row[l]}; e_da[l] = {48'd0, r_data[l]};
          end else if (u_valid) begin
            e_aa[l] = {out_half, AW'(out_base + ucnt[l])}; e_da[l] = {u_v[l], u_w[l]}; ucnt[l]++;
          end
          e_web[l] = z_valid[l];
          if (z_valid[l]) begin
            e_ab[l] = {out_half, AW'(sore_base + zcnt[l])}; e_db[l] = {32'd0, 16'(z_idx[l]), z_val[l]}; zcnt[l]++;
          end
        end
      end
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
