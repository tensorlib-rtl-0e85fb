// tb_workload_bgemv: batched matrix-vector product on a 16 x 16 array with the
// unicast dataflow (DF_UMM), at the full bank depth: 256 batches of a 16 x 16
// matrix times a 16-element vector,
//   C[m][n] = sum over k of A[m][k][n] * B[m][k],   m < 256, n < 16, k < 16.
// PE(r, c) works on n = r, k = c and reads A from its own bank (bank r*16 + c,
// address m); B[m][k] is read from column bank k at address m and reaches the
// whole column; row r's adder tree sums over k and C[m][n] is written to bank n
// at address m. The testbench checks every C word and the run time
// (len + clog2(COLS) + 2 cycles from start to done, plus one for sampling at
// the falling edge).
module tb_workload_bgemv;
  import tl_pkg::*;
  localparam int unsigned ROWS = 16, COLS = 16, DEPTH = 256, DW = 16, ACC_W = 32;
  localparam int unsigned LEN = 256;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned BW = $clog2(ROWS * COLS);
  localparam int EXP_CYC = LEN + $clog2(COLS) + 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              start, busy, done, h_we, h_re;
  logic [AW:0]       len;
  tensor_e           h_tensor;
  logic [BW-1:0]     h_bank, h_rbank;
  logic [AW-1:0]     h_addr, h_raddr;
  logic [DW-1:0]     h_wdata;
  logic [ACC_W-1:0]  h_rdata;

  tensorlib_top #(.ROWS(ROWS), .COLS(COLS), .DATAFLOW(DF_UMM)) u_dut (
    .clk, .rst_n, .start, .len, .busy, .done,
    .h_we, .h_tensor, .h_bank, .h_addr, .h_wdata,
    .h_re, .h_rbank, .h_raddr, .h_rdata
  );

  logic signed [DW-1:0] A [LEN][COLS][ROWS];
  logic signed [DW-1:0] B [LEN][COLS];

  // Holds h_we high; the caller lowers it after its last write.
  task automatic hwrite(tensor_e t, int bank, int addr, logic [DW-1:0] d);
    h_we <= 1'b1; h_tensor <= t; h_bank <= BW'(bank); h_addr <= AW'(addr); h_wdata <= d;
    @(posedge clk);
  endtask

  initial begin
    int seed, cyc;
    longint ref_sum;
    logic [ACC_W-1:0] got;
    seed = $urandom(13);
    start = 0; len = '0; h_we = 0; h_re = 0; h_tensor = TENSOR_A;
    h_bank = '0; h_rbank = '0; h_addr = '0; h_raddr = '0; h_wdata = '0;
    for (int m = 0; m < LEN; m++)
      for (int k = 0; k < COLS; k++) begin
        B[m][k] = DW'($urandom);
        for (int n = 0; n < ROWS; n++) A[m][k][n] = DW'($urandom);
      end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int m = 0; m < LEN; m++)
      for (int k = 0; k < COLS; k++) begin
        hwrite(TENSOR_B, k, m, B[m][k]);
        for (int n = 0; n < ROWS; n++) hwrite(TENSOR_A, n * COLS + k, m, A[m][k][n]);
      end
    h_we <= 1'b0;
    start <= 1'b1; len <= (AW+1)'(LEN);
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    do begin @(negedge clk); cyc++; end while (!done && cyc < 10000);
    checks++;
    if (cyc != EXP_CYC) begin
      failures++;
      $display("bgemv: %0d cycles, expected %0d", cyc, EXP_CYC);
    end
    @(posedge clk);
    for (int m = 0; m < LEN; m++)
      for (int n = 0; n < ROWS; n++) begin
        h_re <= 1'b1; h_rbank <= BW'(n); h_raddr <= AW'(m);
        @(posedge clk);
        h_re <= 1'b0;
        @(negedge clk);
        got = h_rdata;
        ref_sum = 0;
        for (int k = 0; k < COLS; k++) ref_sum += longint'(A[m][k][n]) * longint'(B[m][k]);
        checks++;
        if (got !== ACC_W'(ref_sum)) begin
          failures++;
          if (failures < 10)
            $display("bgemv C[%0d][%0d] = %0d, expected %0d", m, n, $signed(got),
                     $signed(ACC_W'(ref_sum)));
        end
      end
    $display("bgemv: %0d batches of %0dx%0d GEMV in %0d cycles", LEN, ROWS, COLS, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
