// pe_in_systolic: PE input module (a), input tensor with systolic dataflow.
//
// One register captures the element arriving from the neighbouring PE (or the
// array boundary) every cycle. Its value is both the operand of this PE's
// computation cell and the element forwarded to the next PE, so an element
// advances one PE per cycle. Structure as drawn for module (a); synchronous
// active-low reset to zero is this design's choice.
module pe_in_systolic #(
  parameter int unsigned DW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [DW-1:0] din,
  output logic [DW-1:0] dout,
  output logic [DW-1:0] to_cell
);
  logic [DW-1:0] r;

  always_ff @(posedge clk) begin
    if (!rst_n) r <= '0;
    else        r <= din;
  end

  assign dout    = r;
  assign to_cell = r;
endmodule
