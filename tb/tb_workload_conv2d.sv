// tb_workload_conv2d: a 2-D convolution layer run on the default accelerator
// (16 x 16 array, weight-stationary systolic dataflow) with the KCX mapping:
// input channel c on the array rows, output channel k on the columns, output
// column x streamed in time. The layer has the shape of the last ResNet stage
// (7 x 7 output, 3 x 3 kernel, stride 1, zero padding 1) with 16 input and 16
// output channels, i.e. one channel tile of the full layer; more channels only
// repeat the same tiles.
//
// out[k][y][x] = sum over c, p, q of in[c][y+p][x+q] * w[k][c][p][q]
// (in is the padded 9 x 9 input.) For every output row y and kernel tap (p, q)
// the testbench runs one GEMM tile with
//   A[m = x][kk = c] = in[c][y+p][x+q],  B[n = k][kk = c] = w[k][c][p][q],
// len = 7, and adds the tile's C[x][k] into out[k][y][x]. That is 63 tiles. Each
// tile's cycle count and the final output are checked against a direct
// convolution, modulo 2^32 like the 32-bit result words.
module tb_workload_conv2d;
  import tl_pkg::*;
  localparam int unsigned ROWS = 16, COLS = 16, DEPTH = 256, DW = 16, ACC_W = 32;
  localparam int unsigned CH = 16, KO = 16, XO = 7, YO = 7, KP = 3, XI = XO + KP - 1;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned BW = $clog2(ROWS);
  // Start edge to the edge at which done is seen: ROWS+1 load, 1 swap,
  // XO+ROWS+COLS compute, 1 to done.
  localparam int EXP_CYC = XO + 2*ROWS + COLS + 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, tiles = 0;

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

  logic signed [DW-1:0] in_pad [CH][XI][XI];
  logic signed [DW-1:0] w      [KO][CH][KP][KP];
  logic [ACC_W-1:0]     out    [KO][YO][XO];

  // Holds h_we high; the caller lowers it after its last write.
  task automatic hwrite(tensor_e t, int bank, int addr, logic [DW-1:0] d);
    h_we <= 1'b1; h_tensor <= t; h_bank <= BW'(bank); h_addr <= AW'(addr); h_wdata <= d;
    @(posedge clk);
  endtask

  initial begin
    int seed, cyc;
    longint ref_sum;
    seed = $urandom(11);
    start = 0; len = '0; h_we = 0; h_re = 0; h_tensor = TENSOR_A;
    h_bank = '0; h_rbank = '0; h_addr = '0; h_raddr = '0; h_wdata = '0;
    for (int c = 0; c < CH; c++)
      for (int i = 0; i < XI; i++)
        for (int j = 0; j < XI; j++)
          in_pad[c][i][j] = (i == 0 || j == 0 || i == XI-1 || j == XI-1) ? '0 : DW'($urandom);
    for (int k = 0; k < KO; k++)
      for (int c = 0; c < CH; c++)
        for (int p = 0; p < KP; p++)
          for (int q = 0; q < KP; q++) w[k][c][p][q] = DW'($urandom);
    for (int k = 0; k < KO; k++)
      for (int y = 0; y < YO; y++)
        for (int x = 0; x < XO; x++) out[k][y][x] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    for (int y = 0; y < YO; y++)
      for (int p = 0; p < KP; p++)
        for (int q = 0; q < KP; q++) begin
          // A bank c, address x; B bank k, address c.
          for (int c = 0; c < CH; c++)
            for (int x = 0; x < XO; x++) hwrite(TENSOR_A, c, x, in_pad[c][y+p][x+q]);
          for (int k = 0; k < KO; k++)
            for (int c = 0; c < CH; c++) hwrite(TENSOR_B, k, c, w[k][c][p][q]);
          h_we <= 1'b0;
          start <= 1'b1; len <= (AW+1)'(XO);
          @(posedge clk);
          start <= 1'b0;
          cyc = 0;
          do begin @(negedge clk); cyc++; end while (!done && cyc < 10000);
          checks++;
          if (cyc != EXP_CYC) begin
            failures++;
            $display("conv2d tile y=%0d p=%0d q=%0d: %0d cycles, expected %0d", y, p, q, cyc, EXP_CYC);
          end
          tiles++;
          @(posedge clk);
          // C[x][k] is in bank k at address x; the host accumulates.
          for (int k = 0; k < KO; k++)
            for (int x = 0; x < XO; x++) begin
              h_re <= 1'b1; h_rbank <= BW'(k); h_raddr <= AW'(x);
              @(posedge clk);
              h_re <= 1'b0;
              @(negedge clk);
              out[k][y][x] = out[k][y][x] + h_rdata;
            end
          @(posedge clk);
        end

    for (int k = 0; k < KO; k++)
      for (int y = 0; y < YO; y++)
        for (int x = 0; x < XO; x++) begin
          ref_sum = 0;
          for (int c = 0; c < CH; c++)
            for (int p = 0; p < KP; p++)
              for (int q = 0; q < KP; q++)
                ref_sum += longint'(in_pad[c][y+p][x+q]) * longint'(w[k][c][p][q]);
          checks++;
          if (out[k][y][x] !== ACC_W'(ref_sum)) begin
            failures++;
            if (failures < 10)
              $display("conv2d out[%0d][%0d][%0d] = %0d, expected %0d", k, y, x,
                       $signed(out[k][y][x]), $signed(ACC_W'(ref_sum)));
          end
        end
    checks++;
    if (tiles != YO * KP * KP) begin failures++; $display("ran %0d tiles", tiles); end
    $display("conv2d %0dx%0d out, %0dx%0d kernel, %0d->%0d channels: %0d tiles of %0d cycles",
             XO, YO, KP, KP, CH, KO, tiles, EXP_CYC);
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
