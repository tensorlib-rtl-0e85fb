// mem_bank: one bank of the on-chip scratchpad buffer.
//
// DEPTH words of W bits with one write port and one read port that may be used in
// the same cycle. Reads are synchronous: raddr sampled with re in cycle t gives
// rdata in cycle t+1, and rdata holds its value while re is low. A read of the
// address being written returns the old word. The buffer is split into such banks,
// one per group of PEs that shares a tensor index; the depth (256 words) is this
// design's choice. Written as a register array so that any flow can map it onto an
// SRAM macro; contents are not reset.
module mem_bank #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = (DEPTH <= 2) ? 1 : $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  assert property (@(posedge clk) we |-> 32'(waddr) < DEPTH)
    else $error("mem_bank: write address out of range");
  assert property (@(posedge clk) re |-> 32'(raddr) < DEPTH)
    else $error("mem_bank: read address out of range");
endmodule
