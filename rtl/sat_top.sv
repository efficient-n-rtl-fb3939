// sat_top: the sparse training accelerator.
//
// Three engines around a set of double-buffered on-chip buffers:
//  * stce  - R x C systolic array of unified N:M processing elements, WS or OS,
//            fed from the west by the W2E input buffer (one bank per row, one
//            M-group of FP16 values per word) and from the north by the N2S
//            input buffer (one bank per column, one FP16 value + index per
//            word); its south results pass the data router (FP32 -> FP16);
//  * wuve  - C momentum-SGD lanes fed by the optimizer buffer ({g, v, w} per
//            word), producing new FP32 momentum and master weights and FP16
//            weights;
//  * sore  - C top-K reduction lanes turning the FP16 weights of the update
//            pass into compact N:M groups (pre-generation in the WU stage).
// The output data scheduler writes all results into the output buffer. The
// controller runs a list of task words written by the host.
//
// External interfaces: the DDR / DMA side is outside this design, so the
// buffers' fill and drain ports appear here as plain host ports: one write port
// per input/optimizer buffer (bank, address incl. half bit, data) and one read
// port on the output buffer (one cycle latency). Buffer word layouts:
//   W2E  bank r, addr a : M FP16 values (element j in bits 16j+15:16j)
//   N2S  bank c, addr a : {index, FP16 value}
//   OPT  bank l, addr a : {FP16 g, FP32 v, FP32 w}
//   OUT  bank c, addr a : STCE {48'b0, FP16}, WUVE {FP32 v', FP32 w'},
//                         SORE {32'b0, 16-bit index, FP16 value}
// The engine set, buffer roles, lane counts and array size follow the design;
// buffer depths, word layouts and the host ports are this implementation's.
module sat_top
  import sat_fp_pkg::*;
  import sat_pkg::*;
#(
  parameter int unsigned R         = 32,
  parameter int unsigned C         = 32,    // columns = update / reduction lanes
  parameter int unsigned N         = 2,
  parameter int unsigned M         = 8,
  parameter int unsigned DEPTH     = 512,   // words per buffer half
  parameter int unsigned CFG_DEPTH = 16,
  localparam int unsigned I        = 3,     // interleave = adder latency
  localparam int unsigned IW       = $clog2(M),
  localparam int unsigned AW       = $clog2(DEPTH),
  localparam int unsigned CAW      = $clog2(CFG_DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // task list and run control
  input  logic                    cfg_we,
  input  logic [CAW-1:0]          cfg_addr,
  input  cfg_word_t               cfg_wdata,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  // W2E input buffer fill
  input  logic                    w2e_we,
  input  logic [$clog2(R)-1:0]    w2e_bank,
  input  logic [AW:0]             w2e_addr,
  input  logic [M*16-1:0]         w2e_data,
  // N2S input buffer fill
  input  logic                    n2s_we,
  input  logic [$clog2(C)-1:0]    n2s_bank,
  input  logic [AW:0]             n2s_addr,
  input  logic [IW+15:0]          n2s_data,
  // optimizer buffer fill
  input  logic                    opt_we,
  input  logic [$clog2(C)-1:0]    opt_bank,
  input  logic [AW:0]             opt_addr,
  input  logic [79:0]             opt_data,
  // output buffer drain
  input  logic                    out_re,
  input  logic [$clog2(C)-1:0]    out_bank,
  input  logic [AW:0]             out_addr,
  output logic [63:0]             out_rdata
);
  localparam int unsigned NW = $clog2(N + 1);

  // ---------------- controller ----------------
  cfg_word_t  cfg_q;
  logic       clear, pre_phase, os_pop;
  logic       wgen_start, ngen_start, ogen_start, wgen_done, ngen_done, ogen_done;
  logic [2:0] wgen_kind, ngen_kind, wgen_skew, ngen_skew;

  sat_ctrl #(.R(R), .C(C), .M(M), .I(I), .CFG_DEPTH(CFG_DEPTH)) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .start, .busy, .done,
    .cfg_q, .clear,
    .wgen_start, .wgen_kind, .wgen_skew, .wgen_done,
    .ngen_start, .ngen_kind, .ngen_skew, .ngen_done,
    .ogen_start, .ogen_done, .pre_phase, .os_pop
  );

  // ---------------- read sequencers ----------------
  logic [R-1:0]         w_rd, w_dv, w_first, w_last;
  logic [R-1:0][AW-1:0] w_ra;
  logic [C-1:0]         n_rd, n_dv, n_first, n_last;
  logic [C-1:0][AW-1:0] n_ra;
  logic [C-1:0]         o_rd, o_dv, o_first, o_last;
  logic [C-1:0][AW-1:0] o_ra;

  sys_data_gen #(.LANES(R), .AW(AW), .DMAX(7), .I(I), .PRE(R)) u_wgen (
    .clk, .rst_n, .start(wgen_start), .kind(wgen_kind), .n(cfg_q.n), .cnt(cfg_q.cnt),
    .skew(wgen_skew), .rd_en(w_rd), .rd_addr(w_ra), .dv(w_dv), .first(w_first),
    .last(w_last), .done(wgen_done)
  );
  sys_data_gen #(.LANES(C), .AW(AW), .DMAX(7), .I(I), .PRE(R)) u_ngen (
    .clk, .rst_n, .start(ngen_start), .kind(ngen_kind), .n(cfg_q.n), .cnt(cfg_q.cnt),
    .skew(ngen_skew), .rd_en(n_rd), .rd_addr(n_ra), .dv(n_dv), .first(n_first),
    .last(n_last), .done(ngen_done)
  );
  sys_data_gen #(.LANES(C), .AW(AW), .DMAX(1), .I(I), .PRE(R)) u_ogen (
    .clk, .rst_n, .start(ogen_start), .kind(GEN_LIN), .n(cfg_q.n), .cnt(cfg_q.cnt),
    .skew(1'b0), .rd_en(o_rd), .rd_addr(o_ra), .dv(o_dv), .first(o_first),
    .last(o_last), .done(ogen_done)
  );

  // ---------------- input buffers ----------------
  fp16_t [R-1:0][M-1:0] w2e_q;
  logic [C-1:0][IW+15:0] n2s_q;
  logic [C-1:0][79:0]    opt_q;

  for (genvar r = 0; r < R; r++) begin : g_w2e
    db_ram #(.W(M*16), .DEPTH(DEPTH)) u_bank (
      .clk,
      .we_a(w2e_we && w2e_bank == r), .addr_a(w2e_addr), .wdata_a(w2e_data),
      .we_b(1'b0), .addr_b('0), .wdata_b('0),
      .re(w_rd[r]), .raddr({cfg_q.in_half, w_ra[r]}), .rdata(w2e_q[r])
    );
  end
  for (genvar c = 0; c < C; c++) begin : g_n2s
    db_ram #(.W(IW+16), .DEPTH(DEPTH)) u_bank (
      .clk,
      .we_a(n2s_we && n2s_bank == c), .addr_a(n2s_addr), .wdata_a(n2s_data),
      .we_b(1'b0), .addr_b('0), .wdata_b('0),
      .re(n_rd[c]), .raddr({cfg_q.in_half, n_ra[c]}), .rdata(n2s_q[c])
    );
  end
  for (genvar c = 0; c < C; c++) begin : g_opt
    db_ram #(.W(80), .DEPTH(DEPTH)) u_bank (
      .clk,
      .we_a(opt_we && opt_bank == c), .addr_a(opt_addr), .wdata_a(opt_data),
      .we_b(1'b0), .addr_b('0), .wdata_b('0),
      .re(o_rd[c]), .raddr({cfg_q.in_half, o_ra[c]}), .rdata(opt_q[c])
    );
  end

  // ---------------- systolic engine and router ----------------
  fp16_t [C-1:0]         n_data;
  logic [C-1:0][IW-1:0]  n_idx;
  fp32_t [C-1:0]         s_psum;
  logic [C-1:0]          s_pv;
  for (genvar c = 0; c < C; c++) begin : g_nsplit
    assign n_data[c] = n2s_q[c][15:0];
    assign n_idx[c]  = n2s_q[c][IW+15:16];
  end

  stce #(.R(R), .C(C), .N(N), .M(M)) u_stce (
    .clk, .rst_n, .mode_ws(cfg_q.df == DF_WS), .n_cfg(NW'(cfg_q.n)),
    .ws_load(pre_phase && n_dv[0]), .os_pop,
    .w_valid(w_dv), .w_data(w2e_q), .w_first, .w_last,
    .n_data, .n_idx, .s_psum, .s_pv
  );

  logic [C-1:0]          r_we;
  logic [C-1:0][AW-1:0]  r_row;
  fp16_t [C-1:0]         r_data;
  data_router #(.R(R), .C(C), .I(I), .AW(AW)) u_router (
    .clk, .rst_n, .clear, .mode_ws(cfg_q.df == DF_WS), .s_psum, .s_pv,
    .we(r_we), .row(r_row), .data(r_data)
  );

  // ---------------- weight update and reduction ----------------
  fp16_t [C-1:0] u_g;
  fp32_t [C-1:0] u_vin, u_win, u_v, u_w;
  fp16_t [C-1:0] u_h;
  logic          u_valid;
  for (genvar c = 0; c < C; c++) begin : g_osplit
    assign u_g[c]   = opt_q[c][79:64];
    assign u_vin[c] = opt_q[c][63:32];
    assign u_win[c] = opt_q[c][31:0];
  end

  wuve #(.LANES(C)) u_wuve (
    .clk, .rst_n, .s(cfg_q.s), .mu(cfg_q.mu), .lr(cfg_q.lr),
    .in_valid(o_dv[0]), .g(u_g), .v(u_vin), .w(u_win),
    .out_valid(u_valid), .v_next(u_v), .w_next(u_w), .w_half(u_h)
  );

  logic [C-1:0]          z_valid;
  fp16_t [C-1:0]         z_val;
  logic [C-1:0][IW-1:0]  z_idx;
  sore #(.LANES(C), .K(N), .M(M)) u_sore (
    .clk, .rst_n, .n_cfg(cfg_q.sore_n), .in_valid(u_valid && cfg_q.sore_en),
    .in_data(u_h), .out_valid(z_valid), .out_val(z_val), .out_idx(z_idx)
  );

  // ---------------- output scheduler and output buffer ----------------
  logic [C-1:0]          ob_we_a, ob_we_b;
  logic [C-1:0][AW:0]    ob_addr_a, ob_addr_b;
  logic [C-1:0][63:0]    ob_wd_a, ob_wd_b, ob_rd;
  out_sched #(.LANES(C), .AW(AW), .IW(IW)) u_sched (
    .clk, .rst_n, .clear, .out_half(cfg_q.out_half), .out_base(cfg_q.out_base),
    .sore_base(cfg_q.sore_base),
    .r_we, .r_row, .r_data, .u_valid, .u_v, .u_w, .z_valid, .z_val, .z_idx,
    .we_a(ob_we_a), .addr_a(ob_addr_a), .wdata_a(ob_wd_a),
    .we_b(ob_we_b), .addr_b(ob_addr_b), .wdata_b(ob_wd_b)
  );
  for (genvar c = 0; c < C; c++) begin : g_out
    db_ram #(.W(64), .DEPTH(DEPTH)) u_bank (
      .clk,
      .we_a(ob_we_a[c]), .addr_a(ob_addr_a[c]), .wdata_a(ob_wd_a[c]),
      .we_b(ob_we_b[c]), .addr_b(ob_addr_b[c]), .wdata_b(ob_wd_b[c]),
      .re(out_re && out_bank == c), .raddr(out_addr), .rdata(ob_rd[c])
    );
  end
  logic [$clog2(C)-1:0] out_bank_q;
  always_ff @(posedge clk) if (out_re) out_bank_q <= out_bank;
  assign out_rdata = ob_rd[out_bank_q];

endmodule
