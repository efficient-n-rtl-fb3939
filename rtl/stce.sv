// stce: N:M sparse tensor computing engine, an R x C systolic array of uspe
// elements with a flexible interconnect that runs either dataflow.
//
// West inputs enter row r at column 0 and move one column east per cycle;
// north inputs enter column c at row 0 and move one row south per cycle. The
// same links carry, depending on mode_ws:
//  * WS: north data/index shift the stationary sparse weights into every
//    column during preload (ws_load, R*n words per column, bottom row first);
//    then the west rows stream activation groups and partial sums travel south,
//    entering row 0 as zero. Each bottom element emits one result per streamed
//    row (s_pv).
//  * OS: west and north both stream operands; every element keeps I running
//    sums; os_pop then shifts all R*I results per column out of the bottom row,
//    bottom row first, slot 0 first.
// The array size (32 x 32) and the two dataflows follow the design; the link
// contents and the pop order are this implementation's.
module stce
  import sat_fp_pkg::*;
#(
  parameter int unsigned R       = 32,
  parameter int unsigned C       = 32,
  parameter int unsigned N       = 2,
  parameter int unsigned M       = 8,
  parameter int unsigned MUL_LAT = 3,
  parameter int unsigned ADD_LAT = 3,
  localparam int unsigned IW     = $clog2(M),
  localparam int unsigned NW     = $clog2(N + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    mode_ws,
  input  logic [NW-1:0]           n_cfg,
  input  logic                    ws_load,
  input  logic                    os_pop,
  input  logic [R-1:0]            w_valid,
  input  fp16_t [R-1:0][M-1:0]    w_data,
  input  logic [R-1:0]            w_first,
  input  logic [R-1:0]            w_last,
  input  fp16_t [C-1:0]           n_data,
  input  logic [C-1:0][IW-1:0]    n_idx,
  output fp32_t [C-1:0]           s_psum,
  output logic [C-1:0]            s_pv
);

  // horizontal links: hv[r][c] enters element (r,c); column C is the east edge
  logic          hv [R][C+1];
  logic          hf [R][C+1];
  logic          hl [R][C+1];
  fp16_t [M-1:0] hd [R][C+1];
  // vertical links: vd[r][c] enters element (r,c); row R is the south edge
  fp16_t         vd [R+1][C];
  logic [IW-1:0] vi [R+1][C];
  fp32_t         vp [R+1][C];
  logic          vpv[R+1][C];

  for (genvar r = 0; r < R; r++) begin : g_row
    assign hv[r][0] = w_valid[r];
    assign hd[r][0] = w_data[r];
    assign hf[r][0] = w_first[r];
    assign hl[r][0] = w_last[r];
  end
  for (genvar c = 0; c < C; c++) begin : g_col
    assign vd[0][c]  = n_data[c];
    assign vi[0][c]  = n_idx[c];
    assign vp[0][c]  = FP32_ZERO;
    assign vpv[0][c] = 1'b0;
    assign s_psum[c] = vp[R][c];
    assign s_pv[c]   = vpv[R][c];
  end

  for (genvar r = 0; r < R; r++) begin : g_r
    for (genvar c = 0; c < C; c++) begin : g_c
      uspe #(.N(N), .M(M), .MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u_pe (
        .clk, .rst_n, .mode_ws, .n_cfg, .ws_load, .os_pop,
        .w_valid(hv[r][c]),   .w_data(hd[r][c]),   .w_first(hf[r][c]),   .w_last(hl[r][c]),
        .e_valid(hv[r][c+1]), .e_data(hd[r][c+1]), .e_first(hf[r][c+1]), .e_last(hl[r][c+1]),
        .n_data(vd[r][c]),    .n_idx(vi[r][c]),    .n_psum(vp[r][c]),
        .s_data(vd[r+1][c]),  .s_idx(vi[r+1][c]),  .s_psum(vp[r+1][c]),  .s_pv(vpv[r+1][c])
      );
    end
  end

endmodule
