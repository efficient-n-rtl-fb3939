// out_sched: output data scheduler, the single writer of the output buffer.
//
// Collects per-lane results of three producers and turns them into bank
// writes (bank l = column / lane l, 64-bit words, half selected by out_half):
//  * systolic engine (through the router): FP16 result, row address given,
//    written to port a at out_base + row;
//  * weight update lanes: {v', w'} FP32 pair, written to port a at
//    out_base + running count (router has priority; the controller never runs
//    both in one task);
//  * reduction engine: {index, FP16 value}, written to port b at
//    sore_base + running count, so it never collides with the update stream.
// clear restarts the counts at a task start. Writes leave one cycle after the
// inputs. Which producers feed the scheduler follows the design's block
// diagram; the word packing and port split are this implementation's. The
// zero padding bits of the STCE and SORE words are constant outputs by design.
module out_sched
  import sat_fp_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned AW    = 10,   // address width inside one half
  parameter int unsigned IW    = 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      out_half,
  input  logic [11:0]               out_base,
  input  logic [11:0]               sore_base,
  input  logic [LANES-1:0]          r_we,
  input  logic [LANES-1:0][AW-1:0]  r_row,
  input  fp16_t [LANES-1:0]         r_data,
  input  logic                      u_valid,
  input  fp32_t [LANES-1:0]         u_v,
  input  fp32_t [LANES-1:0]         u_w,
  input  logic [LANES-1:0]          z_valid,
  input  fp16_t [LANES-1:0]         z_val,
  input  logic [LANES-1:0][IW-1:0]  z_idx,
  output logic [LANES-1:0]          we_a,
  output logic [LANES-1:0][AW:0]    addr_a,
  output logic [LANES-1:0][63:0]    wdata_a,
  output logic [LANES-1:0]          we_b,
  output logic [LANES-1:0][AW:0]    addr_b,
  output logic [LANES-1:0][63:0]    wdata_b
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [AW-1:0] ucnt_q, zcnt_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ucnt_q <= '0; zcnt_q <= '0;
        we_a[l] <= 1'b0; addr_a[l] <= '0; wdata_a[l] <= '0;
        we_b[l] <= 1'b0; addr_b[l] <= '0; wdata_b[l] <= '0;
      end else if (clear) begin
        ucnt_q <= '0; zcnt_q <= '0; we_a[l] <= 1'b0; we_b[l] <= 1'b0;
      end else begin
        we_a[l] <= r_we[l] || u_valid;
        if (r_we[l]) begin
          addr_a[l]  <= {out_half, AW'(out_base) + r_row[l]};
          wdata_a[l] <= {48'd0, r_data[l]};
        end else if (u_valid) begin
          addr_a[l]  <= {out_half, AW'(out_base) + ucnt_q};
          wdata_a[l] <= {u_v[l], u_w[l]};
          ucnt_q     <= ucnt_q + 1'b1;
        end
        we_b[l] <= z_valid[l];
        if (z_valid[l]) begin
          addr_b[l]  <= {out_half, AW'(sore_base) + zcnt_q};
          wdata_b[l] <= {32'd0, 16'(z_idx[l]), z_val[l]};
          zcnt_q     <= zcnt_q + 1'b1;
        end
      end
    end
  end
endmodule
