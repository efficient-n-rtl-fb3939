// db_ram: one bank of an on-chip buffer, double-buffered.
//
// The bank holds two halves of DEPTH words; the most significant address bit
// selects the half, so a producer can fill one half while a consumer works on
// the other (ping-pong), as all on-chip buffers of the accelerator do. Two write
// ports (a, b) and one synchronous read port with one cycle of latency; if both
// write ports hit the same address in one cycle, port b wins. The double
// buffering follows the design; the port set and sizes are this
// implementation's (the design gives only bank counts of its FPGA build).
module db_ram #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH) + 1
) (
  input  logic          clk,
  input  logic          we_a,
  input  logic [AW-1:0] addr_a,
  input  logic [W-1:0]  wdata_a,
  input  logic          we_b,
  input  logic [AW-1:0] addr_b,
  input  logic [W-1:0]  wdata_b,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [2*DEPTH];

  always_ff @(posedge clk) begin
    if (we_a) mem[addr_a] <= wdata_a;
    if (we_b) mem[addr_b] <= wdata_b;
    if (re)   rdata <= mem[raddr];
  end
endmodule
