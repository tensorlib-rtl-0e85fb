// pe_in_stationary: PE input module (c), input tensor that stays in the PE.
//
// Double buffer of two registers. The shadow register is part of a load chain
// through the PEs: while ctrl.load is high it takes the element from the previous
// PE (or the boundary) and its value is passed on to the next PE, so a column of
// PEs is filled by shifting. The active register feeds the computation cell and
// holds its value until ctrl.swap copies the shadow register into it, one cycle,
// at a stage boundary. Loading the next stage can therefore overlap computing the
// current one. Two mux-and-register pairs with hold paths as drawn for module (c);
// the names load and swap for the mux selects are this design's own.
module pe_in_stationary
  import tl_pkg::*;
#(
  parameter int unsigned DW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  stat_ctrl_t    ctrl,
  input  logic [DW-1:0] din,
  output logic [DW-1:0] dout,
  output logic [DW-1:0] to_cell
);
  logic [DW-1:0] shadow, active;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shadow <= '0;
      active <= '0;
    end else begin
      if (ctrl.load) shadow <= din;
      if (ctrl.swap) active <= shadow;
    end
  end

  assign dout    = shadow;
  assign to_cell = active;
endmodule
