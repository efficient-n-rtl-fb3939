// sore: sparse online reduction engine.
//
// LANES independent lanes, each a top-K sorter followed by a data provider.
// A lane takes a dense stream of FP16 values, one per cycle, cuts it into
// groups of M consecutive values and emits, per group, the n largest-magnitude
// values with their index in the group: the compact N:M form the systolic
// engine consumes. All lanes share in_valid and n_cfg. Latency: the first
// kept value of a group appears 2 cycles after the group's last input; the
// lane accepts a new group every M cycles. Lane count 32, the sorter/provider
// split and serial-in/parallel-out/serial-out follow the design; K (sorter
// depth, the largest n supported) defaults to the N of the engine.
module sore
  import sat_fp_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned K     = 2,
  parameter int unsigned M     = 8,
  localparam int unsigned IW   = $clog2(M)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [2:0]              n_cfg,
  input  logic                    in_valid,
  input  fp16_t [LANES-1:0]       in_data,
  output logic [LANES-1:0]        out_valid,
  output fp16_t [LANES-1:0]       out_val,
  output logic [LANES-1:0][IW-1:0] out_idx
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic                 s_valid;
    fp16_t [K-1:0]        s_val;
    logic [K-1:0][IW-1:0] s_idx;
    logic [K-1:0]         s_full;
    topk_sorter #(.K(K), .M(M)) u_sort (
      .clk, .rst_n, .in_valid, .in_data(in_data[l]),
      .out_valid(s_valid), .out_val(s_val), .out_idx(s_idx), .out_full(s_full)
    );
    data_provider #(.K(K), .M(M)) u_prov (
      .clk, .rst_n, .n_cfg, .load(s_valid), .in_val(s_val), .in_idx(s_idx),
      .out_valid(out_valid[l]), .out_val(out_val[l]), .out_idx(out_idx[l])
    );
  end
endmodule
