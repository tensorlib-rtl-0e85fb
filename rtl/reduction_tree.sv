// reduction_tree: pipelined binary adder tree for a multicast (reduction) output.
//
// When several PEs produce partial sums of the same output element in the same
// cycle, a tree of adders combines them. The N inputs are padded with zeros to
// the next power of two; each level adds pairs and registers the result, so a set
// of inputs presented in cycle t gives its sum at dout in cycle t + LEVELS, with
// LEVELS = clog2(N), and a new set can enter every cycle. The register after each
// level is this design's choice; for N = 1 the input is registered once.
module reduction_tree #(
  parameter int unsigned N     = 16,
  parameter int unsigned ACC_W = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N-1:0][ACC_W-1:0]   din,
  output logic [ACC_W-1:0]          dout
);
  localparam int unsigned LEVELS = (N <= 1) ? 1 : $clog2(N);
  localparam int unsigned P2     = 1 << LEVELS;

  // lvl[l] holds P2 >> l values; level 0 is the zero-padded input.
  logic [LEVELS:0][P2-1:0][ACC_W-1:0] lvl;

  always_comb begin
    lvl[0] = '0;
    for (int i = 0; i < int'(N); i++) lvl[0][i] = din[i];
  end

  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    always_ff @(posedge clk) begin
      if (!rst_n) lvl[l] <= '0;
      else begin
        for (int i = 0; i < int'(P2 >> l); i++)
          lvl[l][i] <= lvl[l-1][2*i] + lvl[l-1][2*i+1];
      end
    end
  end

  assign dout = lvl[LEVELS][0];
endmodule
