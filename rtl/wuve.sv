// wuve: weight update vector engine, LANES parallel momentum-SGD lanes in
// mixed precision.
//
// Per lane and per valid input (FP16 gradient g, FP32 momentum v, FP32 master
// weight w):
//     v' = mu * v + s * float(g)
//     w' = w + lr * v'
//     h  = half(w')
// with three FP32 multipliers (s, mu, lr), two FP32 adders, one half-to-float
// and one float-to-half switcher per lane, the operator set and dataflow of the
// design's lane diagram. lr is signed: the host programs a negative learning
// rate for descent (the diagram shows an adder). Every operator has a register
// after it, giving a fixed latency of 5 cycles from in_valid to out_valid;
// one update per lane per cycle.
module wuve
  import sat_fp_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  fp32_t              s,
  input  fp32_t              mu,
  input  fp32_t              lr,
  input  logic               in_valid,
  input  fp16_t [LANES-1:0]  g,
  input  fp32_t [LANES-1:0]  v,
  input  fp32_t [LANES-1:0]  w,
  output logic               out_valid,
  output fp32_t [LANES-1:0]  v_next,
  output fp32_t [LANES-1:0]  w_next,
  output fp16_t [LANES-1:0]  w_half
);
  localparam int unsigned LAT = 5;
  logic [LAT-1:0] vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end
  assign out_valid = vld[LAT-1];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fp32_t sg1, mv1, w1;      // stage 1
    fp32_t vn2, w2;           // stage 2
    fp32_t lv3, vn3, w3;      // stage 3
    fp32_t wn4, vn4;          // stage 4
    fp32_t wn5, vn5;          // stage 5
    fp16_t h5;
    always_ff @(posedge clk) begin
      sg1 <= fp32_mul(s, fp16_to_fp32(g[l]));
      mv1 <= fp32_mul(mu, v[l]);
      w1  <= w[l];
      vn2 <= fp32_add(mv1, sg1);
      w2  <= w1;
      lv3 <= fp32_mul(lr, vn2);
      vn3 <= vn2;
      w3  <= w2;
      wn4 <= fp32_add(w3, lv3);
      vn4 <= vn3;
      wn5 <= wn4;
      vn5 <= vn4;
      h5  <= fp32_to_fp16(wn4);
    end
    assign v_next[l] = vn5;
    assign w_next[l] = wn5;
    assign w_half[l] = h5;
  end
endmodule
