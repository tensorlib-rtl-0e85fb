// pe_out_stationary: PE output module (d), output tensor that stays in the PE.
//
// The accumulator register adds this PE's product every cycle (the computation
// cell computes product + accumulator). On ctrl.capture, at the end of a stage,
// the finished accumulator is copied into the transfer register and the
// accumulator restarts from this cycle's product alone (addend forced to zero),
// so the next stage can begin in the same cycle. While ctrl.shift is high the
// transfer registers of a PE chain shift the last stage's results toward the
// memory bank, one PE per cycle. Two registers with a mux as drawn for module (d);
// the control encoding is this design's own.
module pe_out_stationary
  import tl_pkg::*;
#(
  parameter int unsigned ACC_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  out_ctrl_t        ctrl,
  input  logic [ACC_W-1:0] chain_in,
  output logic [ACC_W-1:0] chain_out,
  output logic [ACC_W-1:0] addend,
  input  logic [ACC_W-1:0] cell_sum
);
  logic [ACC_W-1:0] acc, xfer;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc  <= '0;
      xfer <= '0;
    end else begin
      acc <= cell_sum;
      if (ctrl.capture)    xfer <= acc;
      else if (ctrl.shift) xfer <= chain_in;
    end
  end

  assign addend    = ctrl.capture ? '0 : acc;
  assign chain_out = xfer;

  // A stage cannot end while its previous results are still being shifted out.
  assert property (@(posedge clk) disable iff (!rst_n) !(ctrl.capture && ctrl.shift))
    else $error("pe_out_stationary: capture and shift in the same cycle");
endmodule
