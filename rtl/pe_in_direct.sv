// pe_in_direct: PE input module (e), input tensor with multicast or unicast dataflow.
//
// The element arrives on a bus shared with other PEs (multicast) or from a bank
// of its own (unicast); a register captures it every cycle and feeds the
// computation cell. Nothing is forwarded to other PEs. As drawn for module (e).
module pe_in_direct #(
  parameter int unsigned DW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [DW-1:0] din,
  output logic [DW-1:0] to_cell
);
  logic [DW-1:0] r;

  always_ff @(posedge clk) begin
    if (!rst_n) r <= '0;
    else        r <= din;
  end

  assign to_cell = r;
endmodule
