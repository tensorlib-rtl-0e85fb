// tb_workload_dwconv: a depthwise convolution (7 x 7 output, 3 x 3 kernel,
// stride 1, zero padding 1, 16 channels) on the default accelerator (16 x 16
// array, weight-stationary systolic dataflow). Depthwise convolution has no sum
// over channels, so the reduction direction of the array (its rows) can only
// hold the 9 kernel taps. Each channel is one GEMM tile:
//   A[m = y*7 + x][kk = p*3 + q] = in[ch][y+p][x+q],  B[n = 0][kk] = w[ch][p][q],
// len = 49. Rows 9..15 and columns 1..15 get zero operands. Only 9 of the 256
// PEs do useful work, which is why this mapping suits the workload poorly. Every
// output and each tile's cycle count are checked against a direct convolution,
// modulo 2^32 like the 32-bit result words.
module tb_workload_dwconv;
  import tl_pkg::*;
  localparam int unsigned ROWS = 16, COLS = 16, DEPTH = 256, DW = 16, ACC_W = 32;
  localparam int unsigned CH = 16, XO = 7, YO = 7, KP = 3, XI = XO + KP - 1;
  localparam int unsigned LEN = XO * YO;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned BW = $clog2(ROWS);
  // Start edge to the edge at which done is seen: ROWS+1 load, 1 swap,
  // LEN+ROWS+COLS compute, 1 to done.
  localparam int EXP_CYC = LEN + 2*ROWS + COLS + 3;

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
  logic signed [DW-1:0] w      [CH][KP][KP];

  // Holds h_we high; the caller lowers it after its last write.
  task automatic hwrite(tensor_e t, int bank, int addr, logic [DW-1:0] d);
    h_we <= 1'b1; h_tensor <= t; h_bank <= BW'(bank); h_addr <= AW'(addr); h_wdata <= d;
    @(posedge clk);
  endtask

  initial begin
    int seed, cyc;
    longint ref_sum;
    seed = $urandom(17);
    start = 0; len = '0; h_we = 0; h_re = 0; h_tensor = TENSOR_A;
    h_bank = '0; h_rbank = '0; h_addr = '0; h_raddr = '0; h_wdata = '0;
    for (int c = 0; c < CH; c++) begin
      for (int i = 0; i < XI; i++)
        for (int j = 0; j < XI; j++)
          in_pad[c][i][j] = (i == 0 || j == 0 || i == XI-1 || j == XI-1) ? '0 : DW'($urandom);
      for (int p = 0; p < KP; p++)
        for (int q = 0; q < KP; q++) w[c][p][q] = DW'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    for (int ch = 0; ch < CH; ch++) begin
      // A bank kk, address m; B bank n, address kk. Unused taps and columns are 0.
      for (int kk = 0; kk < ROWS; kk++)
        for (int m = 0; m < LEN; m++)
          hwrite(TENSOR_A, kk, m, (kk < KP*KP) ? in_pad[ch][m/XO + kk/KP][m%XO + kk%KP] : '0);
      for (int n = 0; n < COLS; n++)
        for (int kk = 0; kk < ROWS; kk++)
          hwrite(TENSOR_B, n, kk, (n == 0 && kk < KP*KP) ? w[ch][kk/KP][kk%KP] : '0);
      h_we <= 1'b0;
      start <= 1'b1; len <= (AW+1)'(LEN);
      @(posedge clk);
      start <= 1'b0;
      cyc = 0;
      do begin @(negedge clk); cyc++; end while (!done && cyc < 10000);
      checks++;
      if (cyc != EXP_CYC) begin
        failures++;
        $display("dwconv channel %0d: %0d cycles, expected %0d", ch, cyc, EXP_CYC);
      end
      tiles++;
      @(posedge clk);
      // out[ch][y][x] is C[y*7 + x][0]: bank 0, address y*7 + x.
      for (int m = 0; m < LEN; m++) begin
        h_re <= 1'b1; h_rbank <= '0; h_raddr <= AW'(m);
        @(posedge clk);
        h_re <= 1'b0;
        @(negedge clk);
        ref_sum = 0;
        for (int p = 0; p < KP; p++)
          for (int q = 0; q < KP; q++)
            ref_sum += longint'(in_pad[ch][m/XO + p][m%XO + q]) * longint'(w[ch][p][q]);
        checks++;
        if (h_rdata !== ACC_W'(ref_sum)) begin
          failures++;
          if (failures < 10)
            $display("dwconv out[%0d][%0d][%0d] = %0d, expected %0d", ch, m/XO, m%XO,
                     $signed(h_rdata), $signed(ACC_W'(ref_sum)));
        end
      end
      @(posedge clk);
    end
    checks++;
    if (tiles != CH) begin failures++; $display("ran %0d tiles", tiles); end
    $display("dwconv %0dx%0d out, %0dx%0d kernel, %0d channels: %0d tiles of %0d cycles",
             XO, YO, KP, KP, CH, tiles, EXP_CYC);
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
