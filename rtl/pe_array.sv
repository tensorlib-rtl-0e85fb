// pe_array: ROWS x COLS processing elements and the interconnect of one dataflow.
//
// DATAFLOW fixes each tensor's flow (see tl_pkg) and with it the PE modules and
// the wiring between PEs:
//   systolic A      : a_in[r] enters PE(r,0) and moves west -> east, one PE per cycle.
//   multicast A     : a_in[c] is a bus driving every PE of column c in the same cycle.
//   unicast A       : a_in[r*COLS+c] goes to PE(r,c) alone (DF_UMM).
//   multicast B     : b_in[c] is a bus driving every PE of column c (DF_UMM).
//   systolic B      : b_in[c] enters PE(0,c) and moves north -> south.
//   stationary B    : b_in[c] feeds the load chain of column c, north -> south;
//                     the column holds ROWS elements, the first one loaded ends at
//                     the bottom PE.
//   systolic C      : partial sums start at zero above row 0, move north -> south;
//                     the bottom PE of column c gives c_out[c].
//   stationary C    : results captured in every PE shift north -> south; the
//                     bottom PE's transfer register is c_out[c].
//   reduction C     : the products of row r go through one reduction_tree; its sum
//                     is c_out[r], clog2(COLS) cycles after the products.
// Control bundles (b_ctrl, c_ctrl) are broadcast to all PEs. NA and NC, the
// numbers of A and C boundary ports, follow tl_pkg::a_banks and c_banks.
module pe_array
  import tl_pkg::*;
#(
  parameter int unsigned ROWS     = 16,
  parameter int unsigned COLS     = 16,
  parameter dataflow_e   DATAFLOW = DF_STS,
  parameter int unsigned DW       = 16,
  parameter int unsigned ACC_W    = 32,
  localparam int unsigned NA      = a_banks(DATAFLOW, ROWS, COLS),
  localparam int unsigned NC      = c_banks(DATAFLOW, ROWS, COLS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  stat_ctrl_t               b_ctrl,
  input  out_ctrl_t                c_ctrl,
  input  logic [NA-1:0][DW-1:0]    a_in,
  input  logic [COLS-1:0][DW-1:0]  b_in,
  output logic [NC-1:0][ACC_W-1:0] c_out
);
  localparam flow_e AF = a_flow(DATAFLOW);
  localparam flow_e BF = b_flow(DATAFLOW);
  localparam flow_e CF = c_flow(DATAFLOW);

  // Inputs and outputs of every PE.
  logic [ROWS-1:0][COLS-1:0][DW-1:0]    a_i, a_o, b_i, b_o;
  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] c_i, c_o;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      // A: west -> east chain, or column bus.
      if (DATAFLOW == DF_UMM) begin : g_a
        assign a_i[r][c] = a_in[r*COLS + c];
      end else if (AF == FLOW_DIRECT) begin : g_a
        assign a_i[r][c] = a_in[c];
      end else if (c == 0) begin : g_a
        assign a_i[r][c] = a_in[r];
      end else begin : g_a
        assign a_i[r][c] = a_o[r][c-1];
      end
      // B: north -> south chain (systolic or stationary load chain), or column bus.
      if (r == 0 || BF == FLOW_DIRECT) begin : g_b
        assign b_i[r][c] = b_in[c];
      end else begin : g_b
        assign b_i[r][c] = b_o[r-1][c];
      end
      // C: north -> south chain; unused for the reduction tree.
      if (r == 0 || CF == FLOW_DIRECT) begin : g_c
        assign c_i[r][c] = '0;
      end else begin : g_c
        assign c_i[r][c] = c_o[r-1][c];
      end

      pe #(.A_FLOW(AF), .B_FLOW(BF), .C_FLOW(CF), .DW(DW), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .a_ctrl('0), .b_ctrl(b_ctrl), .c_ctrl(c_ctrl),
        .a_in(a_i[r][c]), .a_out(a_o[r][c]),
        .b_in(b_i[r][c]), .b_out(b_o[r][c]),
        .c_in(c_i[r][c]), .c_out(c_o[r][c])
      );
    end
  end

  if (CF == FLOW_DIRECT) begin : g_tree
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      reduction_tree #(.N(COLS), .ACC_W(ACC_W)) u_tree (
        .clk, .rst_n, .din(c_o[r]), .dout(c_out[r])
      );
    end
  end else begin : g_south
    for (genvar c = 0; c < COLS; c++) begin : g_col
      assign c_out[c] = c_o[ROWS-1][c];
    end
  end
endmodule
