// tb_wuve: self-checking test of the weight-update vector engine.
//
// Random gradients (FP16), momenta and master weights (FP32) go into every
// lane, one word per cycle with random gaps. Values are multiples of 1/4 and
// the hyper-parameters are powers of two, so v' = mu*v + s*g and
// w' = w + lr*v' are exact and compared bit for bit, as is the FP16 copy of
// w'. The result must appear exactly 5 cycles after its input.
module tb_wuve;
  import sat_fp_pkg::*;
  localparam int L = 4, LAT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fp32_t s, mu, lr;
  logic in_valid = 0, out_valid;
  fp16_t [L-1:0] g = 0, w_half;
  fp32_t [L-1:0] v = 0, w = 0, v_next, w_next;
  wuve #(.LANES(L)) dut (.*);

  function automatic fp32_t d2f(real x);
    logic [63:0] d; logic [10:0] e; logic [24:0] m; int e32;
    d = $realtobits(x);
    e = d[62:52];
    if (e == 0) return {d[63], 31'd0};
    e32 = int'(e) - 1023 + 127;
    m = {2'b01, d[51:29]};
    if (d[28] && (|d[27:0] || d[29])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e32++; end
    return {d[63], 8'(e32), m[22:0]};
  endfunction

  int checks = 0, failures = 0, cyc = 0, nin = 0, nout = 0;
  real ev [$], ew [$]; int et [$];
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    for (int l = 0; l < L; l++) begin
      real a, b; int t;
      a = ev.pop_front(); b = ew.pop_front(); t = et.pop_front();
      checks += 4;
      if (v_next[l] !== d2f(a)) begin failures++; $display("FAIL v lane %0d got %h exp %h", l, v_next[l], d2f(a)); end
      if (w_next[l] !== d2f(b)) begin failures++; $display("FAIL w lane %0d got %h exp %h", l, w_next[l], d2f(b)); end
      if (w_half[l] !== fp32_to_fp16(d2f(b))) begin failures++; $display("FAIL h lane %0d", l); end
      if (cyc - t != LAT) begin failures++; $display("FAIL latency %0d", cyc - t); end
    end
    nout++;
  end

  initial begin
    s = d2f(2.0); mu = d2f(0.5); lr = d2f(-0.25);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_valid = $urandom_range(0, 3) != 0;
      if (in_valid) begin
        for (int l = 0; l < L; l++) begin
          real gr, vr, wr, vn;
          gr = (real'($urandom_range(0, 64)) - 32.0) / 4.0;
          vr = (real'($urandom_range(0, 256)) - 128.0) / 4.0;
          wr = (real'($urandom_range(0, 4096)) - 2048.0) / 4.0;
          g[l] = fp32_to_fp16(d2f(gr)); v[l] = d2f(vr); w[l] = d2f(wr);
          vn = 0.5 * vr + 2.0 * gr;
          ev.push_back(vn); ew.push_back(wr - 0.25 * vn); et.push_back(cyc);
        end
        nin++;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    checks++; if (nin != nout || nin == 0) begin failures++; $display("FAIL in %0d out %0d", nin, nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
