// pe_out_systolic: PE output module (b), output tensor with systolic dataflow.
//
// The partial sum arriving from the previous PE is registered; the register feeds
// the computation cell as its addend and the cell's result (partial sum plus this
// PE's product) leaves toward the next PE in the same cycle. A partial sum thus
// gains one product per PE and one cycle per hop. Structure as drawn for module
// (b), where no register sits on the output path; reset to zero is a local choice.
module pe_out_systolic #(
  parameter int unsigned ACC_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ACC_W-1:0] psum_in,
  output logic [ACC_W-1:0] addend,
  input  logic [ACC_W-1:0] cell_sum,
  output logic [ACC_W-1:0] psum_out
);
  logic [ACC_W-1:0] r;

  always_ff @(posedge clk) begin
    if (!rst_n) r <= '0;
    else        r <= psum_in;
  end

  assign addend   = r;
  assign psum_out = cell_sum;
endmodule
