// data_router: configurable data router on the south edge of the systolic
// engine.
//
// Each cycle a column may deliver one FP32 result (s_pv). The router rounds it
// to FP16 (float-to-half) and computes the output row it belongs to:
//  * WS: results leave in streamed-row order, so the row is a running count.
//  * OS: a column pops R*I results, bottom element first and slot 0 first, so
//    result j belongs to row (R-1 - j/I)*I + j%I (kept as two counters).
// Outputs are registered: one cycle from s_pv to we. clear resets the counters
// at the start of a task. The design names the router; its behaviour here is
// this implementation's.
module data_router
  import sat_fp_pkg::*;
#(
  parameter int unsigned R  = 32,
  parameter int unsigned C  = 32,
  parameter int unsigned I  = 3,
  parameter int unsigned AW = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 mode_ws,
  input  fp32_t [C-1:0]        s_psum,
  input  logic [C-1:0]         s_pv,
  output logic [C-1:0]         we,
  output logic [C-1:0][AW-1:0] row,
  output fp16_t [C-1:0]        data
);
  for (genvar c = 0; c < C; c++) begin : g_col
    logic [AW-1:0]          cnt_q;
    logic [$clog2(I)-1:0]   s_q;
    logic [$clog2(R)-1:0]   r_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cnt_q <= '0; s_q <= '0; r_q <= '0;
        we[c] <= 1'b0; row[c] <= '0; data[c] <= '0;
      end else if (clear) begin
        cnt_q <= '0; s_q <= '0; r_q <= '0; we[c] <= 1'b0;
      end else begin
        we[c] <= s_pv[c];
        if (s_pv[c]) begin
          data[c] <= fp32_to_fp16(s_psum[c]);
          if (mode_ws) begin
            row[c] <= cnt_q;
            cnt_q  <= cnt_q + 1'b1;
          end else begin
            row[c] <= AW'((R - 1 - 32'(r_q)) * I + 32'(s_q));
            if (s_q == $clog2(I)'(I - 1)) begin
              s_q <= '0;
              r_q <= r_q + 1'b1;
            end else s_q <= s_q + 1'b1;
          end
        end
      end
    end
  end
endmodule
