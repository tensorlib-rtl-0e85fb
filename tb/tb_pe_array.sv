// tb_pe_array: PE arrays of each of the four dataflows driven straight from the testbench
// (array_check), with non-square shapes; every C element is checked in the
// cycle the space-time schedule gives.
module tb_pe_array;
  import tl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [3:0] fin;
  int ck [4], fl [4];
  int checks = 0, failures = 0;

  array_check #(.ROWS(3), .COLS(4), .DATAFLOW(DF_STS), .LEN(7)) u0 (
    .clk, .rst_n, .finished(fin[0]), .checks(ck[0]), .failures(fl[0]));
  array_check #(.ROWS(4), .COLS(3), .DATAFLOW(DF_SST), .LEN(6)) u1 (
    .clk, .rst_n, .finished(fin[1]), .checks(ck[1]), .failures(fl[1]));
  array_check #(.ROWS(3), .COLS(6), .DATAFLOW(DF_MTM), .LEN(5)) u2 (
    .clk, .rst_n, .finished(fin[2]), .checks(ck[2]), .failures(fl[2]));

  array_check #(.ROWS(3), .COLS(5), .DATAFLOW(DF_UMM), .LEN(4)) u3 (
    .clk, .rst_n, .finished(fin[3]), .checks(ck[3]), .failures(fl[3]));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&fin);
    for (int i = 0; i < 4; i++) begin checks += ck[i]; failures += fl[i]; end
    // every element of the three C tiles must have been checked
    if (checks != 7*4 + 4*3 + 5*3 + 4*3) begin
      failures++;
      $display("only %0d results seen", checks);
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
