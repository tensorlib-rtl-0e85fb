// tb_tensorlib_top: end-to-end test of the accelerator in all four dataflows.
//
// Five small arrays run one random tile each through gemm_run: weight stationary
// systolic (STS, 4x5), output stationary (SST, 5x4), multicast with reduction
// tree (MTM, 4x5: a tree of five inputs padded to eight), MTM with a single-row
// stream (LEN = 1), and batched GEMV with unicast A (UMM, 3x5). Each result word
// and each run's cycle count is checked. The test also requires that every
// mechanism happened at least once: stationary double-buffer swap and load-chain
// shift, stage capture and drain shift of the stationary output, multicast bus
// reads, unicast reads and reduction-tree results.
module tb_tensorlib_top;
  import tl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NR = 5;
  logic [NR-1:0] fin;
  int ck [NR], fl [NR], sw [NR], ld [NR], cp [NR], sh [NR], mc [NR], tr [NR];
  int checks = 0, failures = 0;

  gemm_run #(.ROWS(4), .COLS(5), .DATAFLOW(DF_STS), .DEPTH(32), .LEN(9), .SEED(11)) u_sts (
    .clk, .rst_n, .finished(fin[0]), .checks(ck[0]), .failures(fl[0]), .n_swap(sw[0]),
    .n_load(ld[0]), .n_capture(cp[0]), .n_shift(sh[0]), .n_mcast(mc[0]), .n_tree(tr[0]));
  gemm_run #(.ROWS(5), .COLS(4), .DATAFLOW(DF_SST), .DEPTH(32), .LEN(7), .SEED(22)) u_sst (
    .clk, .rst_n, .finished(fin[1]), .checks(ck[1]), .failures(fl[1]), .n_swap(sw[1]),
    .n_load(ld[1]), .n_capture(cp[1]), .n_shift(sh[1]), .n_mcast(mc[1]), .n_tree(tr[1]));
  gemm_run #(.ROWS(4), .COLS(5), .DATAFLOW(DF_MTM), .DEPTH(32), .LEN(10), .SEED(33)) u_mtm (
    .clk, .rst_n, .finished(fin[2]), .checks(ck[2]), .failures(fl[2]), .n_swap(sw[2]),
    .n_load(ld[2]), .n_capture(cp[2]), .n_shift(sh[2]), .n_mcast(mc[2]), .n_tree(tr[2]));
  gemm_run #(.ROWS(3), .COLS(2), .DATAFLOW(DF_MTM), .DEPTH(8), .LEN(1), .SEED(44)) u_mtm1 (
    .clk, .rst_n, .finished(fin[3]), .checks(ck[3]), .failures(fl[3]), .n_swap(sw[3]),
    .n_load(ld[3]), .n_capture(cp[3]), .n_shift(sh[3]), .n_mcast(mc[3]), .n_tree(tr[3]));
  gemm_run #(.ROWS(3), .COLS(5), .DATAFLOW(DF_UMM), .DEPTH(16), .LEN(6), .SEED(55)) u_umm (
    .clk, .rst_n, .finished(fin[4]), .checks(ck[4]), .failures(fl[4]), .n_swap(sw[4]),
    .n_load(ld[4]), .n_capture(cp[4]), .n_shift(sh[4]), .n_mcast(mc[4]), .n_tree(tr[4]));

  task automatic need(string what, int count);
    checks++;
    $display("mechanism %-28s happened %0d times", what, count);
    if (count == 0) begin failures++; $display("  FAIL: never happened"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&fin);
    for (int i = 0; i < NR; i++) begin checks += ck[i]; failures += fl[i]; end
    need("stationary swap (STS)", sw[0]);
    need("load-chain shift (STS)", ld[0]);
    need("systolic result write (STS)", tr[0]);
    need("stage capture (SST)", cp[1]);
    need("drain shift (SST)", sh[1]);
    need("stationary swap (MTM)", sw[2]);
    need("multicast read (MTM)", mc[2]);
    need("reduction-tree result (MTM)", tr[2]);
    need("unicast read cycle (UMM)", mc[4]);
    need("reduction-tree result (UMM)", tr[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
