// sat_ctrl: controller of the accelerator, the FSM block together with the
// control signal distributor.
//
// The host writes a list of task words (cfg_word_t) into a small configuration
// memory and pulses start. The FSM fetches the words in order and, for each,
// starts the read sequencers and steers the engines:
//   OP_MM, OS : west and north generators stream the operands -> drain ->
//               pop R*I results per column through the router
//   OP_MM, WS : north generator preloads the stationary weights (ws_load) ->
//               west generator streams the rows -> drain
//   OP_WU     : optimizer-lane generator streams (g, v, w) through the update
//               lanes (and the reduction engine when sore_en) -> drain
//   OP_END    : done pulse, back to idle
// Drain times are fixed counts derived from the pipeline depths, so a task
// ends when its last result has been written. The current word is held in
// cfg_q and drives the engines' mode inputs (the distributor role). The
// per-layer configuration-word scheme follows the design; the word format,
// the states and the drain arithmetic are this implementation's. A few
// generator-kind and skew bits never change for the kinds used, so synthesis
// ties them to constants.
module sat_ctrl
  import sat_pkg::*;
#(
  parameter int unsigned R         = 32,
  parameter int unsigned C         = 32,
  parameter int unsigned M         = 8,
  parameter int unsigned I         = 3,
  parameter int unsigned MUL_LAT   = 3,
  parameter int unsigned ADD_LAT   = 3,
  parameter int unsigned CFG_DEPTH = 16,
  localparam int unsigned CAW      = $clog2(CFG_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // host programming port
  input  logic            cfg_we,
  input  logic [CAW-1:0]  cfg_addr,
  input  cfg_word_t       cfg_wdata,
  input  logic            start,
  output logic            busy,
  output logic            done,
  // distributed configuration
  output cfg_word_t       cfg_q,
  output logic            clear,
  // generators
  output logic            wgen_start,
  output logic [2:0]      wgen_kind,
  output logic [2:0]      wgen_skew,
  input  logic            wgen_done,
  output logic            ngen_start,
  output logic [2:0]      ngen_kind,
  output logic [2:0]      ngen_skew,
  input  logic            ngen_done,
  output logic            ogen_start,
  input  logic            ogen_done,
  // engine control
  output logic            pre_phase,
  output logic            os_pop
);
  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_PRE, S_PRE_WAIT, S_RUN, S_DRAIN, S_POP, S_FLUSH, S_NEXT, S_DONE
  } state_e;

  cfg_word_t       mem [CFG_DEPTH];
  state_e          st_q;
  logic [CAW-1:0]  pc_q;
  logic [11:0]     tmr_q;
  logic [11:0]     drain_cycles;

  always_ff @(posedge clk) begin
    if (cfg_we) mem[cfg_addr] <= cfg_wdata;
  end

  always_comb begin
    if (cfg_q.op == OP_WU)       drain_cycles = 12'(16 + M);
    else if (cfg_q.df == DF_WS)  drain_cycles = 12'(C + (32'(cfg_q.n) - 1) * I + MUL_LAT + ADD_LAT + 8);
    else                         drain_cycles = 12'(C + MUL_LAT + ADD_LAT + 6);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; pc_q <= '0; tmr_q <= '0; cfg_q <= '0;
      wgen_start <= 1'b0; ngen_start <= 1'b0; ogen_start <= 1'b0;
      wgen_kind <= GEN_OS_W; ngen_kind <= GEN_OS_N; clear <= 1'b0; done <= 1'b0;
    end else begin
      wgen_start <= 1'b0; ngen_start <= 1'b0; ogen_start <= 1'b0;
      clear <= 1'b0; done <= 1'b0;
      unique case (st_q)
        S_IDLE:   if (start) begin pc_q <= '0; st_q <= S_FETCH; end
        S_FETCH:  begin cfg_q <= mem[pc_q]; clear <= 1'b1; st_q <= S_DECODE; end
        S_DECODE: begin
          unique case (cfg_q.op)
            OP_MM: begin
              if (cfg_q.df == DF_WS) begin
                ngen_kind <= GEN_PRE; ngen_start <= 1'b1; st_q <= S_PRE;
              end else begin
                wgen_kind <= GEN_OS_W; ngen_kind <= GEN_OS_N;
                wgen_start <= 1'b1; ngen_start <= 1'b1; st_q <= S_RUN;
              end
            end
            OP_WU:   begin ogen_start <= 1'b1; st_q <= S_RUN; end
            default: st_q <= S_DONE;
          endcase
        end
        S_PRE:      if (ngen_done) begin tmr_q <= 12'd2; st_q <= S_PRE_WAIT; end
        S_PRE_WAIT: if (tmr_q == '0) begin
                      wgen_kind <= GEN_WS_W; wgen_start <= 1'b1; st_q <= S_RUN;
                    end else tmr_q <= tmr_q - 1'b1;
        S_RUN:    if ((cfg_q.op == OP_WU) ? ogen_done : wgen_done) begin
                    tmr_q <= drain_cycles; st_q <= S_DRAIN;
                  end
        S_DRAIN:  if (tmr_q == '0) begin
                    if (cfg_q.op == OP_MM && cfg_q.df == DF_OS) begin
                      tmr_q <= 12'(R * I - 1); st_q <= S_POP;
                    end else st_q <= S_NEXT;
                  end else tmr_q <= tmr_q - 1'b1;
        S_POP:    if (tmr_q == '0) begin tmr_q <= 12'd3; st_q <= S_FLUSH; end
                  else tmr_q <= tmr_q - 1'b1;
        S_FLUSH:  if (tmr_q == '0) st_q <= S_NEXT; else tmr_q <= tmr_q - 1'b1;
        S_NEXT:   begin pc_q <= pc_q + 1'b1; st_q <= S_FETCH; end
        S_DONE:   begin done <= 1'b1; st_q <= S_IDLE; end
        default:  st_q <= S_IDLE;
      endcase
    end
  end

  assign busy      = (st_q != S_IDLE);
  assign pre_phase = (st_q == S_PRE) || (st_q == S_PRE_WAIT);
  assign os_pop    = (st_q == S_POP);
  // WS rows are spaced so a psum meets the k=0 product of the row below
  assign wgen_skew = (cfg_q.df == DF_WS) ? 3'((32'(cfg_q.n) - 1) * I + ADD_LAT + 1) : 3'd1;
  assign ngen_skew = (st_q == S_PRE || st_q == S_DECODE && cfg_q.df == DF_WS) ? 3'd0 : 3'd1;

endmodule
