// tb_sat_fp_pkg: self-checking test of the floating-point functions.
//
// Random operands are built as small integers scaled by powers of two, so the
// exact result fits a double and a double -> single rounding in this bench gives
// the correctly rounded reference. Checked: FP32 multiply and add (incl.
// cancellation and signed operands), FP16 <-> FP32 round trips, FP32 -> FP16
// rounding of halfway cases, FP16 multiply, special values and the magnitude
// compare used by the top-K sorter. A clock only paces the checks; the
// functions are combinational.
module tb_sat_fp_pkg;
  import sat_fp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  function automatic fp32_t d2f(real v);
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
  function automatic real f2r(fp32_t f);
    logic [10:0] e; logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    e = 11'(f[30:23]) + 11'd896;
    d = {f[31], e, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction
  function automatic real rnd(int span, int sh);
    real v; int e;
    v = real'($urandom_range(0, 2*span)) - real'(span);
    e = $urandom_range(0, 2*sh);
    e = e - sh;
    return v * (2.0 ** e);
  endfunction

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    real a, b;
    fp16_t h;
    int cyc0, cyc1;
    @(posedge clk); cyc0 = $time;
    for (int t = 0; t < 2000; t++) begin
      a = rnd(1 << 20, 8); b = rnd(1 << 20, 8);
      chk("mul", fp32_mul(d2f(a), d2f(b)), d2f(a * b));
      a = rnd(1 << 23, 6); b = rnd(1 << 23, 6);
      chk("add", fp32_add(d2f(a), d2f(b)), d2f(a + b));
      a = rnd(4096, 4); b = -a + rnd(3, 2);
      chk("add cancel", fp32_add(d2f(a), d2f(b)), d2f(a + b));
      h = 16'($urandom);
      if (h[14:10] != 0 && h[14:10] != 5'h1f)
        chk("h2f2h", 32'(fp32_to_fp16(fp16_to_fp32(h))), 32'(h));
      @(posedge clk);
    end
    cyc1 = $time;
    // exact cancellation gives +0
    chk("a-a", fp32_add(d2f(3.5), d2f(-3.5)), 32'h0);
    chk("1+1", fp32_add(32'h3f800000, 32'h3f800000), 32'h40000000);
    chk("1.5*2", fp32_mul(32'h3fc00000, 32'h40000000), 32'h40400000);
    // FP32 -> FP16 halfway: 1 + 2^-11 rounds to even (1.0), 1 + 3*2^-11 rounds up
    chk("rne down", 32'(fp32_to_fp16(d2f(1.0 + 2.0 ** -11))), 32'h3c00);
    chk("rne up", 32'(fp32_to_fp16(d2f(1.0 + 3.0 * 2.0 ** -11))), 32'h3c02);
    chk("f2h overflow", 32'(fp32_to_fp16(d2f(70000.0))), 32'h7c00);
    chk("f2h small", 32'(fp32_to_fp16(d2f(2.0 ** -20))), 32'h0000);
    chk("inf*0", fp32_mul(32'h7f800000, 32'h0), FP32_QNAN);
    chk("inf-inf", fp32_add(32'h7f800000, 32'hff800000), FP32_QNAN);
    chk("h mul", 32'(fp16_mul(16'h4000, 16'hc200)), 32'(16'hc600));  // 2 * -3 = -6
    chk("mag gt", 32'(fp16_mag_gt(16'hc200, 16'h4000)), 32'd1);
    chk("mag eq", 32'(fp16_mag_gt(16'hc000, 16'h4000)), 32'd0);
    chk("mag lt", 32'(fp16_mag_gt(16'h3c00, 16'hbc01)), 32'd0);
    // pacing: one random round per cycle
    checks++; if ((cyc1 - cyc0) != 2000 * 10) begin failures++; $display("FAIL pacing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
