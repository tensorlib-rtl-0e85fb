// tb_full_size: one complete operation of the accelerator at its default
// parameters: a 16 x 16 array with weight-stationary systolic dataflow (STS),
// 16-bit operands, 256-word banks. A random 256 x 16 A and 16 x 16 B are loaded,
// one tile C = A * B^T (256 x 16) is computed, every C word is read back and
// compared with a 64-bit reference, and the run's cycle count is checked
// (ROWS+1 preload, 1 swap, M+ROWS+COLS compute, 1 to done).
module tb_full_size;
  import tl_pkg::*;
  localparam int unsigned ROWS = 16, COLS = 16, DEPTH = 256, LEN = 256, SEED = 7;
  localparam dataflow_e DATAFLOW = DF_STS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic finished;
  int checks, failures, n_swap, n_load, n_capture, n_shift, n_mcast, n_tree;
  localparam int unsigned DW = 16, ACC_W = 32;
  localparam int unsigned AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);
  localparam int unsigned MAXB = (ROWS > COLS) ? ROWS : COLS;
  localparam int unsigned BW = (MAXB <= 2) ? 1 : $clog2(MAXB);
  localparam int MM = (DATAFLOW == DF_SST) ? ROWS : LEN;
  localparam int NN = (DATAFLOW == DF_MTM) ? ROWS : COLS;
  localparam int KK = (DATAFLOW == DF_STS) ? ROWS : (DATAFLOW == DF_SST) ? LEN : COLS;
  localparam int LEVELS = (COLS <= 1) ? 1 : $clog2(COLS);
  // Cycles from the start edge to the edge at which done is seen high.
  //   STS: ROWS+1 load, 1 swap, LEN+ROWS+COLS compute, 1 to done.
  //   SST: LEN+ROWS+COLS+1 compute, ROWS drain, 1 to done.
  //   MTM: ROWS+1 load, 1 swap, LEN+LEVELS+2 compute, 1 to done.
  localparam int EXP_CYC = (DATAFLOW == DF_STS) ? LEN + 2*ROWS + COLS + 3 :
                           (DATAFLOW == DF_SST) ? LEN + 2*ROWS + COLS + 2 :
                                                  LEN + ROWS + LEVELS + 5;

  logic              start, busy, done, h_we, h_re;
  logic [AW:0]       len;
  tensor_e           h_tensor;
  logic [BW-1:0]     h_bank, h_rbank;
  logic [AW-1:0]     h_addr, h_raddr;
  logic [DW-1:0]     h_wdata;
  logic [ACC_W-1:0]  h_rdata;

  tensorlib_top u_dut (
    .clk, .rst_n, .start, .len, .busy, .done,
    .h_we, .h_tensor, .h_bank, .h_addr, .h_wdata,
    .h_re, .h_rbank, .h_raddr, .h_rdata
  );

  logic signed [DW-1:0] A [MM][KK];
  logic signed [DW-1:0] B [NN][KK];
  longint               Cref [MM][NN];

  // Mechanism counters, from the controls seen by the array.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (u_dut.b_ctrl.swap)    n_swap    <= n_swap + 1;
      if (u_dut.b_ctrl.load)    n_load    <= n_load + 1;
      if (u_dut.c_ctrl.capture) n_capture <= n_capture + 1;
      if (u_dut.c_ctrl.shift)   n_shift   <= n_shift + 1;
      if (DATAFLOW == DF_MTM && |u_dut.a_re) n_mcast <= n_mcast + 1;
      if (|u_dut.c_we) n_tree  <= n_tree + 1;
    end
  end

  // Holds h_we high; the caller lowers it after its last write.
  task automatic hwrite(tensor_e t, int bank, int addr, logic [DW-1:0] d);
    h_we <= 1'b1; h_tensor <= t; h_bank <= BW'(bank); h_addr <= AW'(addr); h_wdata <= d;
    @(posedge clk);
  endtask

  int cyc;
  initial begin
    int seed;
    logic [ACC_W-1:0] got, exp;
    finished = 0; checks = 0; failures = 0;
    n_swap = 0; n_load = 0; n_capture = 0; n_shift = 0; n_mcast = 0; n_tree = 0;
    start = 0; len = '0; h_we = 0; h_re = 0; h_tensor = TENSOR_A;
    h_bank = '0; h_rbank = '0; h_addr = '0; h_raddr = '0; h_wdata = '0;
    seed = $urandom(SEED);
    for (int m = 0; m < MM; m++) for (int k = 0; k < KK; k++) A[m][k] = DW'($urandom);
    for (int n = 0; n < NN; n++) for (int k = 0; k < KK; k++) B[n][k] = DW'($urandom);
    for (int m = 0; m < MM; m++)
      for (int n = 0; n < NN; n++) begin
        Cref[m][n] = 0;
        for (int k = 0; k < KK; k++) Cref[m][n] += longint'(A[m][k]) * longint'(B[n][k]);
      end
    @(posedge clk);
    while (!rst_n) @(posedge clk);
    // Load the banks in the layout of the dataflow.
    for (int i = 0; i < MM * KK; i++) begin
      int m, k;
      m = i / KK;
      k = i % KK;
      case (DATAFLOW)
        DF_STS:  hwrite(TENSOR_A, k, m, A[m][k]);
        DF_SST:  hwrite(TENSOR_A, m, k, A[m][k]);
        default: hwrite(TENSOR_A, k, m, A[m][k]);
      endcase
    end
    for (int i = 0; i < NN * KK; i++) begin
      int n, k;
      n = i / KK;
      k = i % KK;
      case (DATAFLOW)
        DF_STS:  hwrite(TENSOR_B, n, k, B[n][k]);
        DF_SST:  hwrite(TENSOR_B, n, k, B[n][k]);
        default: hwrite(TENSOR_B, k, n, B[n][k]);
      endcase
    end
    h_we <= 1'b0;
    start <= 1'b1; len <= (AW+1)'(LEN);
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    do begin @(negedge clk); cyc++; end while (!done && cyc < 100000);
    checks++;
    if (cyc != EXP_CYC) begin
      failures++;
      $display("full_size df=%0d: %0d cycles, expected %0d", DATAFLOW, cyc, EXP_CYC);
    end
    @(posedge clk);
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("full_size df=%0d: busy after done", DATAFLOW); end
    // Read C back.
    // Every dataflow keeps C[m][n] in bank n at address m.
    for (int i = 0; i < MM * NN; i++) begin
      int m, n;
      m = i / NN;
      n = i % NN;
      h_re <= 1'b1; h_rbank <= BW'(n); h_raddr <= AW'(m);
      @(posedge clk);
      h_re <= 1'b0;
      @(negedge clk);
      got = h_rdata;
      exp = ACC_W'(Cref[m][n]);
      checks++;
      if (got !== exp) begin
        failures++;
        if (failures < 10)
          $display("full_size df=%0d: C[%0d][%0d] = %0d, expected %0d", DATAFLOW, m, n,
                   $signed(got), $signed(exp));
      end
    end
    finished = 1;
    checks++;
    if (n_swap != 1 || n_load != ROWS || n_tree == 0) begin
      failures++;
      $display("mechanisms: swap %0d load %0d result writes %0d", n_swap, n_load, n_tree);
    end
    $display("full size STS 16x16, M=%0d: %0d cycles, %0d MACs", LEN, cyc, LEN*ROWS*COLS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
