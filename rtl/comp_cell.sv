// comp_cell: the computation cell of a PE, a signed multiply-accumulate.
//
// sum = a * b + addend, purely combinational. The multiplier operands are DW-bit
// signed integers (INT16 by default, the datatype of the ASIC evaluation); the
// product is sign-extended to the ACC_W-bit accumulator width (32 bits, this
// design's choice) before the add. The addend comes from the PE's output-tensor
// module: the registered partial sum (systolic), the accumulator (stationary) or
// zero (reduction tree). Wraps modulo 2^ACC_W.
module comp_cell #(
  parameter int unsigned DW    = 16,
  parameter int unsigned ACC_W = 32
) (
  input  logic signed [DW-1:0]    a,
  input  logic signed [DW-1:0]    b,
  input  logic signed [ACC_W-1:0] addend,
  output logic signed [ACC_W-1:0] sum
);
  logic signed [2*DW-1:0] prod;

  always_comb begin
    prod = a * b;
    sum  = ACC_W'(prod) + addend;
  end

  initial assert (ACC_W >= 2 * DW) else $error("comp_cell: ACC_W must hold a full product");
endmodule
