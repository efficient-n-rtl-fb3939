// data_provider: parallel-in, serial-out stage of a reduction lane.
//
// Takes the K sorted entries of a group from the top-K sorter (load) and emits
// the first n of them (1 <= n <= K, set at runtime), largest magnitude first,
// one per cycle with its group index. It starts in the cycle after load and
// needs n cycles, fewer than the M cycles the sorter spends on the next group.
// Being configurable for any n not larger than K follows the design; the
// output order is this implementation's.
module data_provider
  import sat_fp_pkg::*;
#(
  parameter int unsigned K  = 2,
  parameter int unsigned M  = 8,
  localparam int unsigned IW = $clog2(M),
  localparam int unsigned CW = $clog2(K + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2:0]           n_cfg,
  input  logic                 load,
  input  fp16_t [K-1:0]        in_val,
  input  logic [K-1:0][IW-1:0] in_idx,
  output logic                 out_valid,
  output fp16_t                out_val,
  output logic [IW-1:0]        out_idx
);
  fp16_t [K-1:0]        val_q;
  logic [K-1:0][IW-1:0] idx_q;
  logic [CW-1:0]        rem_q, ptr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      val_q <= '0; idx_q <= '0; rem_q <= '0; ptr_q <= '0;
    end else if (load) begin
      val_q <= in_val; idx_q <= in_idx;
      rem_q <= (n_cfg > 3'(K)) ? CW'(K) : CW'(n_cfg);
      ptr_q <= '0;
    end else if (rem_q != '0) begin
      rem_q <= rem_q - 1'b1;
      ptr_q <= ptr_q + 1'b1;
    end
  end

  assign out_valid = (rem_q != '0);
  assign out_val   = val_q[ptr_q];
  assign out_idx   = idx_q[ptr_q];
endmodule
