// tb_db_ram: self-checking test of the double-buffered bank RAM.
//
// Random writes on ports a and b and random reads are compared against a
// behavioural model: one cycle read latency, read data held while re is low,
// port b wins a same-address collision, and the two halves (address MSB) are
// independent, so a task can read one half while the other is filled.
module tb_db_ram;
  localparam int W = 20, DEPTH = 16, AW = $clog2(DEPTH) + 1;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we_a = 0, we_b = 0, re = 0;
  logic [AW-1:0] addr_a = 0, addr_b = 0, raddr = 0;
  logic [W-1:0] wdata_a = 0, wdata_b = 0, rdata;
  db_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);

  logic [W-1:0] model [2*DEPTH];
  logic [W-1:0] exp_q;
  logic         chk_q = 0;
  bit           have_read = 0;
  int checks = 0, failures = 0, collisions = 0, holds = 0;

  initial begin
    // fill both halves through port a, writing distinct data per half
    for (int a = 0; a < 2*DEPTH; a++) begin
      @(negedge clk); we_a = 1; addr_a = AW'(a); wdata_a = W'($urandom); model[a] = wdata_a;
    end
    @(negedge clk); we_a = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // check the read issued in the previous cycle
      if (chk_q) begin
        checks++;
        if (rdata !== exp_q) begin failures++; if (failures < 10) $display("FAIL read %h exp %h", rdata, exp_q); end
      end else if (have_read) begin
        checks++; holds++;
        if (rdata !== exp_q) begin failures++; if (failures < 10) $display("FAIL hold %h exp %h", rdata, exp_q); end
      end
      we_a = $urandom_range(0, 1); we_b = $urandom_range(0, 1); re = $urandom_range(0, 1);
      addr_a = AW'($urandom); addr_b = ($urandom_range(0, 3) == 0) ? addr_a : AW'($urandom);
      raddr = AW'($urandom); wdata_a = W'($urandom); wdata_b = W'($urandom);
      chk_q = re;
      if (re) have_read = 1;
      if (re) exp_q = model[raddr];   // read returns the old data on a same-cycle write
      if (we_a) model[addr_a] = wdata_a;
      if (we_b) model[addr_b] = wdata_b;
      if (we_a && we_b && addr_a == addr_b) collisions++;
    end
    @(negedge clk); we_a = 0; we_b = 0; re = 0;
    checks++; if (collisions == 0 || holds == 0) begin failures++; $display("FAIL no collision/hold case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
