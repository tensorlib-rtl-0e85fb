// pe: one processing element, assembled from per-tensor internal modules.
//
// A GEMM PE has two input tensors (A, B) and one output tensor (C). For each of
// them the parameters A_FLOW, B_FLOW and C_FLOW select the internal module that
// matches that tensor's dataflow, and the selected modules are joined to one
// computation cell (multiply-accumulate):
//   input  systolic   -> pe_in_systolic   (module a)
//   input  stationary -> pe_in_stationary (module c)
//   input  direct     -> pe_in_direct     (module e, multicast/unicast)
//   output systolic   -> pe_out_systolic  (module b)
//   output stationary -> pe_out_stationary(module d)
//   output direct     -> module (f): zero addend, cell result leaves unregistered
// The modules of different tensors do not connect to each other, only to the cell.
// *_out ports carry what a systolic or stationary module forwards to the next PE;
// they are zero for a direct port. Control inputs not used by the chosen modules
// are ignored.
//
// Timing: an input element presented at *_in in cycle t is used by the cell in
// cycle t+1. For a systolic output, c_in registered in cycle t joins the product
// of cycle t+1 and appears at c_out in that cycle.
module pe
  import tl_pkg::*;
#(
  parameter flow_e       A_FLOW = FLOW_SYSTOLIC,
  parameter flow_e       B_FLOW = FLOW_STATIONARY,
  parameter flow_e       C_FLOW = FLOW_SYSTOLIC,
  parameter int unsigned DW     = 16,
  parameter int unsigned ACC_W  = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  stat_ctrl_t       a_ctrl,
  input  stat_ctrl_t       b_ctrl,
  input  out_ctrl_t        c_ctrl,
  input  logic [DW-1:0]    a_in,
  output logic [DW-1:0]    a_out,
  input  logic [DW-1:0]    b_in,
  output logic [DW-1:0]    b_out,
  input  logic [ACC_W-1:0] c_in,
  output logic [ACC_W-1:0] c_out
);
  logic [DW-1:0]    a_op, b_op;
  logic [ACC_W-1:0] addend, cell_sum;

  // One input tensor port, selected by its flow.
  if (A_FLOW == FLOW_SYSTOLIC) begin : g_a
    pe_in_systolic #(.DW(DW)) u_in (.clk, .rst_n, .din(a_in), .dout(a_out), .to_cell(a_op));
  end else if (A_FLOW == FLOW_STATIONARY) begin : g_a
    pe_in_stationary #(.DW(DW)) u_in (.clk, .rst_n, .ctrl(a_ctrl), .din(a_in), .dout(a_out),
                                      .to_cell(a_op));
  end else begin : g_a
    pe_in_direct #(.DW(DW)) u_in (.clk, .rst_n, .din(a_in), .to_cell(a_op));
    assign a_out = '0;
  end

  if (B_FLOW == FLOW_SYSTOLIC) begin : g_b
    pe_in_systolic #(.DW(DW)) u_in (.clk, .rst_n, .din(b_in), .dout(b_out), .to_cell(b_op));
  end else if (B_FLOW == FLOW_STATIONARY) begin : g_b
    pe_in_stationary #(.DW(DW)) u_in (.clk, .rst_n, .ctrl(b_ctrl), .din(b_in), .dout(b_out),
                                      .to_cell(b_op));
  end else begin : g_b
    pe_in_direct #(.DW(DW)) u_in (.clk, .rst_n, .din(b_in), .to_cell(b_op));
    assign b_out = '0;
  end

  comp_cell #(.DW(DW), .ACC_W(ACC_W)) u_cell (
    .a(a_op), .b(b_op), .addend(addend), .sum(cell_sum)
  );

  if (C_FLOW == FLOW_SYSTOLIC) begin : g_c
    pe_out_systolic #(.ACC_W(ACC_W)) u_out (.clk, .rst_n, .psum_in(c_in), .addend(addend),
                                            .cell_sum(cell_sum), .psum_out(c_out));
  end else if (C_FLOW == FLOW_STATIONARY) begin : g_c
    pe_out_stationary #(.ACC_W(ACC_W)) u_out (.clk, .rst_n, .ctrl(c_ctrl), .chain_in(c_in),
                                              .chain_out(c_out), .addend(addend),
                                              .cell_sum(cell_sum));
  end else begin : g_c
    // Module (f): the product leaves the PE directly.
    assign addend = '0;
    assign c_out  = cell_sum;
  end
endmodule
