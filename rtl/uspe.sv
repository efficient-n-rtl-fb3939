// uspe: unified N:M sparse processing element of the systolic engine.
//
// One multiply-accumulate per cycle: an FP16 multiplier (MUL_LAT pipeline
// stages), a half-to-float switcher and an FP32 adder (ADD_LAT stages). A dot
// product over one group is folded into n cycles ("value-serial"): in cycle k
// the operand from the west group register is picked by index k of the group,
// so a 1:8 group takes one cycle, a 2:8 group two cycles, and a dense 2:2 group
// (index k = position k) two cycles.
//
// Because the adder is pipelined, the accumulation loop of one dot product can
// only be closed every ADD_LAT cycles. The element therefore always interleaves
// I = ADD_LAT independent dot products (slots): the cycle sequence of a group
// is (k=0,slot0) (k=0,slot1) (k=0,slot2) (k=1,slot0) ... and the running sums
// circulate through the adder pipeline, which acts as the accumulator register
// file. The feeder repeats each west group once per k. This interleave mapping
// follows the design; using it in the WS dataflow as well is this
// implementation's choice, made so that the psum chain also tolerates the
// 3-stage adder.
//
// Dataflows (mode_ws):
//  * WS: n (value, index) pairs are preloaded into the stationary register file
//    through a column shift chain (ws_load). Per group, the partial sum from the
//    north is added at k=0, the other products are accumulated, and the result
//    is sent south in ws_q one cycle after it leaves the adder (s_pv high).
//  * OS: the north stream brings one (value, index) pair per cycle, the west
//    stream a group. The sum starts from zero on the first group (w_first) and
//    after the last group (w_last) the I finished sums are shifted into the
//    accumulator output register file. os_pop then shifts those registers down
//    the column, one value per cycle, n_psum entering at the top.
//
// Timing: west and north data are registered here and forwarded east/south
// from those registers (one cycle per hop). In WS, the north psum must arrive
// at the cycle the k=0 product reaches the adder; the feeder skews rows by
// (n-1)*I + ADD_LAT + 1 cycles for this. The west stream must not pause within
// a group sequence of n*I cycles.
module uspe
  import sat_fp_pkg::*;
#(
  parameter int unsigned N       = 2,   // values per group (N of N:M)
  parameter int unsigned M       = 8,   // group size (M of N:M)
  parameter int unsigned MUL_LAT = 3,
  parameter int unsigned ADD_LAT = 3,
  localparam int unsigned I      = ADD_LAT,     // interleaved dot products
  localparam int unsigned IW     = $clog2(M),
  localparam int unsigned NW     = $clog2(N + 1),
  localparam int unsigned SW     = $clog2(I),
  localparam int unsigned KW     = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 mode_ws,   // 1: WS, 0: OS
  input  logic [NW-1:0]        n_cfg,     // 1..N values per group
  input  logic                 ws_load,   // shift the stationary chain
  input  logic                 os_pop,    // shift accumulator results south
  // west -> east
  input  logic                 w_valid,
  input  fp16_t [M-1:0]        w_data,
  input  logic                 w_first,
  input  logic                 w_last,
  output logic                 e_valid,
  output fp16_t [M-1:0]        e_data,
  output logic                 e_first,
  output logic                 e_last,
  // north -> south
  input  fp16_t                n_data,
  input  logic [IW-1:0]        n_idx,
  input  fp32_t                n_psum,
  output fp16_t                s_data,
  output logic [IW-1:0]        s_idx,
  output fp32_t                s_psum,
  output logic                 s_pv
);

  typedef struct packed {
    logic valid;
    logic kfirst;
    logic klast;
    logic gfirst;
    logic glast;
  } ctl_t;

  // ---------------- input register files ----------------
  logic           v_q, first_q, last_q;
  fp16_t [M-1:0]  w_q;          // west DATA REGF (one group)
  fp16_t          n_q;          // north DATA REGF (OS stream)
  logic [IW-1:0]  ni_q;         // north INDEX REGF (OS stream)
  fp16_t [N-1:0]  st_val;       // stationary values (WS)
  logic [IW-1:0]  st_idx [N];   // stationary indexes (WS)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q     <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
      w_q     <= '0;
      n_q     <= '0;
      ni_q    <= '0;
    end else begin
      v_q     <= w_valid;
      first_q <= w_first;
      last_q  <= w_last;
      w_q     <= w_data;
      n_q     <= n_data;
      ni_q    <= n_idx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_val <= '0;
      for (int i = 0; i < N; i++) st_idx[i] <= '0;
    end else if (ws_load) begin
      st_val[0] <= n_data;
      st_idx[0] <= n_idx;
      for (int i = 1; i < N; i++) begin
        st_val[i] <= st_val[i-1];
        st_idx[i] <= st_idx[i-1];
      end
    end
  end

  assign e_valid = v_q;
  assign e_data  = w_q;
  assign e_first = first_q;
  assign e_last  = last_q;
  logic [KW-1:0] n_last;
  assign n_last  = KW'(n_cfg - 1'b1);
  assign s_data  = mode_ws ? st_val[n_last] : n_q;
  assign s_idx   = mode_ws ? st_idx[n_last] : ni_q;

  // ---------------- task counter: slot and k ----------------
  logic [SW-1:0]         slot_q;
  logic [NW-1:0]         k_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_q <= '0;
      k_q    <= '0;
    end else if (v_q) begin
      if (slot_q == SW'(I - 1)) begin
        slot_q <= '0;
        k_q    <= (k_q == n_cfg - 1'b1) ? '0 : k_q + 1'b1;
      end else begin
        slot_q <= slot_q + 1'b1;
      end
    end
  end

  // ---------------- operand select and multiplier ----------------
  logic [IW-1:0] sel_idx;
  fp16_t         op_a, op_b;
  always_comb begin
    sel_idx = mode_ws ? st_idx[KW'(k_q)] : ni_q;
    op_a    = w_q[sel_idx];
    op_b    = mode_ws ? st_val[KW'(k_q)] : n_q;
  end

  fp16_t mul_pipe [MUL_LAT];
  ctl_t  ctl_pipe [MUL_LAT + ADD_LAT];
  ctl_t  ctl_in;
  assign ctl_in = '{valid: v_q, kfirst: (k_q == '0), klast: (k_q == n_cfg - 1'b1),
                    gfirst: first_q, glast: last_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MUL_LAT; i++) mul_pipe[i] <= '0;
      for (int i = 0; i < MUL_LAT + ADD_LAT; i++) ctl_pipe[i] <= '0;
    end else begin
      mul_pipe[0] <= fp16_mul(op_a, op_b);
      for (int i = 1; i < MUL_LAT; i++) mul_pipe[i] <= mul_pipe[i-1];
      ctl_pipe[0] <= ctl_in;
      for (int i = 1; i < MUL_LAT + ADD_LAT; i++) ctl_pipe[i] <= ctl_pipe[i-1];
    end
  end

  // ---------------- adder with accumulation loop ----------------
  fp32_t add_pipe [ADD_LAT];
  fp32_t loop_v, prod32, add_c, add_in;
  ctl_t  ctl_m, ctl_a;
  assign loop_v = add_pipe[ADD_LAT-1];
  assign prod32 = fp16_to_fp32(mul_pipe[MUL_LAT-1]);
  assign ctl_m  = ctl_pipe[MUL_LAT-1];
  assign ctl_a  = ctl_pipe[MUL_LAT+ADD_LAT-1];

  always_comb begin
    if (ctl_m.kfirst) add_c = mode_ws ? n_psum : (ctl_m.gfirst ? FP32_ZERO : loop_v);
    else              add_c = loop_v;
    add_in = ctl_m.valid ? fp32_add(prod32, add_c) : loop_v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ADD_LAT; i++) add_pipe[i] <= '0;
    end else begin
      add_pipe[0] <= add_in;
      for (int i = 1; i < ADD_LAT; i++) add_pipe[i] <= add_pipe[i-1];
    end
  end

  // ---------------- results: WS psum register, OS accumulator file ----------------
  fp32_t acc_q [I];
  fp32_t ws_q;
  logic  ws_pv;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws_q  <= '0;
      ws_pv <= 1'b0;
      for (int i = 0; i < I; i++) acc_q[i] <= '0;
    end else begin
      ws_pv <= mode_ws && ctl_a.valid && ctl_a.klast;
      if (mode_ws && ctl_a.valid && ctl_a.klast) ws_q <= loop_v;
      if (!mode_ws && os_pop) begin
        acc_q[0] <= n_psum;
        for (int i = 1; i < I; i++) acc_q[i] <= acc_q[i-1];
      end else if (!mode_ws && ctl_a.valid && ctl_a.klast && ctl_a.glast) begin
        acc_q[0] <= loop_v;
        for (int i = 1; i < I; i++) acc_q[i] <= acc_q[i-1];
      end
    end
  end

  assign s_psum = mode_ws ? ws_q : acc_q[I-1];
  assign s_pv   = mode_ws ? ws_pv : os_pop;

  if (N < 2 || N > M) begin : g_chk_n $error("uspe: N must be in 2..M"); end
  if (ADD_LAT < 2) begin : g_chk_lat $error("uspe: interleave needs a pipelined adder"); end

endmodule
