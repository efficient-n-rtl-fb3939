// sys_data_gen: systolic data generator, the read sequencer in front of the
// systolic engine (one instance for the west rows, one for the north columns)
// and of the optimizer lanes.
//
// It produces the buffer read stream for one task: a base sequence of
// addresses for lane 0, and for lane l the same sequence delayed by l*skew
// cycles, so the engine receives the wavefront a systolic array needs. The
// delay is a chain of DMAX-deep shift registers with a runtime tap. Each lane's
// read enable and address go to its buffer bank; valid/first/last come out one
// cycle later, aligned with the synchronous RAM read data.
//
// Sequences (kind), with I interleaved slots, n values per group and cnt from
// the task word:
//   GEN_OS_W : for g<cnt, k<n, s<I : addr = g*I + s   (west, OS)
//   GEN_OS_N : for g<cnt, k<n, s<I : addr = g*n + k   (north, OS)
//   GEN_WS_W : for b<cnt, k<n, s<I : addr = b*I + s   (west, WS)
//   GEN_PRE  : for j<PRE*n        : addr = PRE*n-1-j  (north WS preload, bottom row first)
//   GEN_LIN  : for j<cnt          : addr = j          (optimizer lanes)
// first/last mark g==0 and g==cnt-1. done pulses when lane LANES-1 has issued
// its last read. A new skew value may be applied only after the chain has
// emptied (DMAX idle cycles); the controller's drain times always leave more. The address sequences and the skew chain are this
// implementation's; the design names the generator and shows where it sits.
module sys_data_gen
  import sat_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned AW    = 10,   // address width inside one buffer half
  parameter int unsigned DMAX  = 7,    // largest per-lane skew
  parameter int unsigned I     = 3,    // interleaved slots
  parameter int unsigned PRE   = 32    // rows of the array (preload length / n)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [2:0]             kind,
  input  logic [2:0]             n,
  input  logic [11:0]            cnt,
  input  logic [$clog2(DMAX+1)-1:0] skew,
  output logic [LANES-1:0]       rd_en,
  output logic [LANES-1:0][AW-1:0] rd_addr,
  output logic [LANES-1:0]       dv,
  output logic [LANES-1:0]       first,
  output logic [LANES-1:0]       last,
  output logic                   done
);

  typedef struct packed {
    logic          v;
    logic          f;
    logic          l;
    logic [AW-1:0] a;
  } item_t;

  // ---------------- base sequence ----------------
  logic        run;
  logic [2:0]  kind_q, n_q;
  logic [11:0] cnt_q, g_q, j_q;
  logic [2:0]  k_q;
  logic [1:0]  s_q;
  logic [12:0] pre_len;
  item_t       base;

  assign pre_len = 13'(PRE) * 13'(n_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; kind_q <= '0; n_q <= 3'd1; cnt_q <= '0;
      g_q <= '0; j_q <= '0; k_q <= '0; s_q <= '0;
    end else if (start) begin
      run <= 1'b1; kind_q <= kind; n_q <= n; cnt_q <= cnt;
      g_q <= '0; j_q <= '0; k_q <= '0; s_q <= '0;
    end else if (run) begin
      if (kind_q == GEN_PRE || kind_q == GEN_LIN) begin
        j_q <= j_q + 1'b1;
        if ((kind_q == GEN_PRE) ? (13'(j_q) == pre_len - 1'b1) : (j_q == cnt_q - 1'b1)) run <= 1'b0;
      end else if (s_q == 2'(I - 1)) begin
        s_q <= '0;
        if (k_q == n_q - 1'b1) begin
          k_q <= '0;
          g_q <= g_q + 1'b1;
          if (g_q == cnt_q - 1'b1) run <= 1'b0;
        end else k_q <= k_q + 1'b1;
      end else s_q <= s_q + 1'b1;
    end
  end

  always_comb begin
    base.v = run;
    base.f = (g_q == '0);
    base.l = (g_q == cnt_q - 1'b1);
    unique case (kind_q)
      GEN_OS_N: base.a = AW'(g_q * 12'(n_q) + 12'(k_q));
      GEN_PRE : base.a = AW'(pre_len - 13'd1 - 13'(j_q));
      GEN_LIN : base.a = AW'(j_q);
      default : base.a = AW'(g_q * 12'(I) + 12'(s_q));
    endcase
  end

  // ---------------- skew chain ----------------
  item_t lane [LANES];
  assign lane[0] = base;
  for (genvar l = 1; l < LANES; l++) begin : g_skew
    item_t sr [DMAX];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < DMAX; i++) sr[i] <= '0;
      end else begin
        sr[0] <= lane[l-1];
        for (int i = 1; i < DMAX; i++) sr[i] <= sr[i-1];
      end
    end
    assign lane[l] = (skew == '0) ? lane[l-1] : sr[skew - 1'b1];
  end

  // ---------------- outputs ----------------
  logic last_issue;
  for (genvar l = 0; l < LANES; l++) begin : g_out
    assign rd_en[l]   = lane[l].v;
    assign rd_addr[l] = lane[l].a;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        dv[l] <= 1'b0; first[l] <= 1'b0; last[l] <= 1'b0;
      end else begin
        dv[l] <= lane[l].v; first[l] <= lane[l].f; last[l] <= lane[l].l;
      end
    end
  end

  // done: falling edge of the last lane's valid
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_issue <= 1'b0;
    else        last_issue <= lane[LANES-1].v;
  end
  assign done = last_issue && !lane[LANES-1].v;

endmodule
