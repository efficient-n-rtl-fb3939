// topk_sorter: serial-in, parallel-out top-K magnitude sorter, one per lane of
// the sparse online reduction engine.
//
// The M elements of a group arrive one per cycle (in_valid). The sorter keeps K
// entries ordered by magnitude, entry 0 largest. For each new element every
// entry raises a flag when the new magnitude is strictly larger than its own
// (an empty entry always flags). Each entry then, from its own flag and the
// flag of the entry above it: freezes (0,0), takes the new element (above 0,
// self 1) or takes the element of the entry above (1,1) - the flag behaviours
// of the design's sorter figure. Equal magnitudes keep the earlier element.
// The group index of an element is its arrival position. When the M-th
// element has been taken, the K sorted entries and their indexes are presented
// in parallel (out_valid for one cycle, the cycle after the M-th input) and the
// sorter starts the next group empty, so groups can follow back to back.
module topk_sorter
  import sat_fp_pkg::*;
#(
  parameter int unsigned K  = 2,
  parameter int unsigned M  = 8,
  localparam int unsigned IW = $clog2(M)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  fp16_t              in_data,
  output logic               out_valid,
  output fp16_t [K-1:0]      out_val,
  output logic [K-1:0][IW-1:0] out_idx,
  output logic [K-1:0]       out_full   // entry holds an element
);
  fp16_t [K-1:0]         val_q, val_d;
  logic [K-1:0][IW-1:0]  idx_q, idx_d;
  logic [K-1:0]          ful_q, ful_d, flag;
  logic [IW-1:0]         pos_q;

  always_comb begin
    for (int i = 0; i < K; i++) begin
      // at the start of a group every entry counts as empty
      flag[i] = (pos_q == '0) || !ful_q[i] || fp16_mag_gt(in_data, val_q[i]);
    end
    for (int i = 0; i < K; i++) begin
      logic above;
      above = (i == 0) ? 1'b0 : flag[i-1];
      if (flag[i] && !above) begin           // insert
        val_d[i] = in_data; idx_d[i] = pos_q; ful_d[i] = 1'b1;
      end else if (flag[i] && above) begin   // shift from the entry above
        val_d[i] = val_q[i-1]; idx_d[i] = idx_q[i-1];
        ful_d[i] = (pos_q == '0) ? 1'b0 : ful_q[i-1];
      end else begin                         // freeze
        val_d[i] = val_q[i]; idx_d[i] = idx_q[i]; ful_d[i] = ful_q[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      val_q <= '0; idx_q <= '0; ful_q <= '0; pos_q <= '0;
      out_valid <= 1'b0; out_val <= '0; out_idx <= '0; out_full <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        val_q <= val_d; idx_q <= idx_d; ful_q <= ful_d;
        pos_q <= (pos_q == IW'(M - 1)) ? '0 : pos_q + 1'b1;
        if (pos_q == IW'(M - 1)) begin
          out_valid <= 1'b1;
          out_val   <= val_d;
          out_idx   <= idx_d;
          out_full  <= ful_d;
        end
      end
    end
  end
endmodule
