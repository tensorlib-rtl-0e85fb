// tensorlib_top: a spatial GEMM accelerator, C[m,n] = sum_k A[m,k] * B[n,k]
// (or, with DATAFLOW = DF_UMM, batched GEMV C[m,n] = sum_k A[m,k,n] * B[m,k]).
//
// Three groups of scratchpad banks (A, B: DW bits; C: ACC_W bits), the controller
// and a ROWS x COLS PE array wired for the dataflow DATAFLOW (see tl_pkg and
// controller for the mapping and the bank layout of each dataflow). Operation:
//   1. While idle, the host (or a DMA engine from main memory) writes A and B
//      words with h_we / h_tensor / h_bank / h_addr / h_wdata, one per cycle.
//   2. start with len = streamed loop bound (M for STS, MTM and UMM, K for SST).
//   3. busy stays high until done pulses; then C words are read back with
//      h_re / h_rbank / h_raddr, data on h_rdata one cycle later.
// Reads issued by the controller reach the array boundary one cycle later and are
// zeroed when no read was issued, so idle lanes feed zeros. Host writes during
// busy are not allowed (asserted). Default size is the 16 x 16 INT16 array of the
// evaluation with weight-stationary systolic dataflow (STS); bank depth and the
// 32-bit accumulator are this design's choices.
module tensorlib_top
  import tl_pkg::*;
#(
  parameter int unsigned ROWS     = 16,
  parameter int unsigned COLS     = 16,
  parameter dataflow_e   DATAFLOW = DF_STS,
  parameter int unsigned DW       = 16,
  parameter int unsigned ACC_W    = 32,
  parameter int unsigned DEPTH    = 256,
  localparam int unsigned AW      = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned NA      = a_banks(DATAFLOW, ROWS, COLS),
  localparam int unsigned NC      = c_banks(DATAFLOW, ROWS, COLS),
  localparam int unsigned MAXB    = (NA > COLS) ? ((NA > ROWS) ? NA : ROWS)
                                                : ((COLS > ROWS) ? COLS : ROWS),
  localparam int unsigned BW      = (MAXB <= 2) ? 1 : $clog2(MAXB)
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  logic [AW:0]       len,
  output logic              busy,
  output logic              done,
  // host write into A or B banks
  input  logic              h_we,
  input  tensor_e           h_tensor,
  input  logic [BW-1:0]     h_bank,
  input  logic [AW-1:0]     h_addr,
  input  logic [DW-1:0]     h_wdata,
  // host read of C banks
  input  logic              h_re,
  input  logic [BW-1:0]     h_rbank,
  input  logic [AW-1:0]     h_raddr,
  output logic [ACC_W-1:0]  h_rdata
);
  logic [NA-1:0]              a_re, a_vld;
  logic [NA-1:0][AW-1:0]      a_raddr;
  logic [NA-1:0][DW-1:0]      a_rdata, a_edge;
  logic [COLS-1:0]            b_re, b_vld;
  logic [COLS-1:0][AW-1:0]    b_raddr;
  logic [COLS-1:0][DW-1:0]    b_rdata, b_edge;
  logic [NC-1:0]              c_we;
  logic [NC-1:0][AW-1:0]      c_waddr;
  logic [NC-1:0][ACC_W-1:0]   c_res, c_rdata;
  stat_ctrl_t                 b_ctrl;
  out_ctrl_t                  c_ctrl;
  logic [BW-1:0]              h_rbank_q;

  controller #(.ROWS(ROWS), .COLS(COLS), .DATAFLOW(DATAFLOW), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .len, .busy, .done,
    .a_re, .a_raddr, .a_vld, .b_re, .b_raddr, .b_vld,
    .b_ctrl, .c_ctrl, .c_we, .c_waddr
  );

  for (genvar i = 0; i < NA; i++) begin : g_abank
    mem_bank #(.W(DW), .DEPTH(DEPTH)) u_bank (
      .clk,
      .we(h_we && h_tensor == TENSOR_A && h_bank == BW'(i)), .waddr(h_addr), .wdata(h_wdata),
      .re(a_re[i]), .raddr(a_raddr[i]), .rdata(a_rdata[i])
    );
    assign a_edge[i] = a_vld[i] ? a_rdata[i] : '0;
  end

  for (genvar i = 0; i < COLS; i++) begin : g_bbank
    mem_bank #(.W(DW), .DEPTH(DEPTH)) u_bank (
      .clk,
      .we(h_we && h_tensor == TENSOR_B && h_bank == BW'(i)), .waddr(h_addr), .wdata(h_wdata),
      .re(b_re[i]), .raddr(b_raddr[i]), .rdata(b_rdata[i])
    );
    assign b_edge[i] = b_vld[i] ? b_rdata[i] : '0;
  end

  for (genvar i = 0; i < NC; i++) begin : g_cbank
    mem_bank #(.W(ACC_W), .DEPTH(DEPTH)) u_bank (
      .clk,
      .we(c_we[i]), .waddr(c_waddr[i]), .wdata(c_res[i]),
      .re(h_re && h_rbank == BW'(i)), .raddr(h_raddr), .rdata(c_rdata[i])
    );
  end

  pe_array #(.ROWS(ROWS), .COLS(COLS), .DATAFLOW(DATAFLOW), .DW(DW), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n, .b_ctrl, .c_ctrl, .a_in(a_edge), .b_in(b_edge), .c_out(c_res)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)    h_rbank_q <= '0;
    else if (h_re) h_rbank_q <= h_rbank;
  end
  assign h_rdata = (32'(h_rbank_q) < NC) ? c_rdata[h_rbank_q] : '0;

  assert property (@(posedge clk) disable iff (!rst_n) h_we |-> !busy)
    else $error("tensorlib_top: host write while busy");
  assert property (@(posedge clk) disable iff (!rst_n) h_we |-> h_tensor != TENSOR_C)
    else $error("tensorlib_top: C banks are written by the array only");
endmodule
