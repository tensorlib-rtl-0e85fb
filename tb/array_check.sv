// array_check: test helper that drives a pe_array directly, without the
// controller, following the space-time schedule of its dataflow, and checks the
// results at the array edge in the cycles the schedule predicts. Cycle tau counts
// from the first boundary input; an input driven in cycle tau is used by the
// boundary PE in cycle tau+1.
//   STS: B[c][ROWS-1-s] loaded at s, swap; A[m][r] on a_in[r] at tau = m + r;
//        C[m][c] at c_out[c] in tau = m + ROWS + c.
//   SST: A[r][k] at tau = k + r, B[c][k] at tau = k + c; capture at
//        tau = LEN + ROWS + COLS - 1; C[ROWS-1-s][c] at c_out[c] s+1 cycles later.
//   MTM: B[n][c] loaded as for STS; A[m][c] on a_in[c] at tau = m;
//        C[m][r] at c_out[r] in tau = m + 1 + clog2(COLS).
//   UMM: A[m][c][r] on a_in[r*COLS+c] and B[m][c] on b_in[c] at tau = m;
//        C[m][r] = sum_c A[m][c][r] * B[m][c] at c_out[r] in tau = m + 1 + clog2(COLS).
module array_check
  import tl_pkg::*;
#(
  parameter int unsigned ROWS     = 3,
  parameter int unsigned COLS     = 4,
  parameter dataflow_e   DATAFLOW = DF_STS,
  parameter int unsigned LEN      = 6
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int NA = a_banks(DATAFLOW, ROWS, COLS);
  localparam int NC = c_banks(DATAFLOW, ROWS, COLS);
  localparam int MM = (DATAFLOW == DF_SST) ? ROWS : LEN;
  localparam int NN = (DATAFLOW == DF_MTM || DATAFLOW == DF_UMM) ? ROWS : COLS;
  localparam int KK = (DATAFLOW == DF_STS) ? ROWS : (DATAFLOW == DF_SST) ? LEN : COLS;
  localparam int LEVELS = (COLS <= 1) ? 1 : $clog2(COLS);
  localparam int R = ROWS, C = COLS;

  stat_ctrl_t                b_ctrl;
  out_ctrl_t                 c_ctrl;
  logic [NA-1:0][15:0]       a_in;
  logic [COLS-1:0][15:0]     b_in;
  logic [NC-1:0][31:0]       c_out;
  logic signed [15:0] A [MM][KK];
  logic signed [15:0] B [NN][KK];
  logic signed [15:0] A3 [MM][KK][NN];
  logic signed [15:0] Bv [MM][KK];
  longint Cref [MM][NN];

  pe_array #(.ROWS(ROWS), .COLS(COLS), .DATAFLOW(DATAFLOW)) u_arr (
    .clk, .rst_n, .b_ctrl, .c_ctrl, .a_in, .b_in, .c_out);

  task automatic chk(int m, int n, logic [31:0] got);
    checks++;
    if (got !== 32'(Cref[m][n])) begin
      failures++;
      if (failures < 6) $display("array df=%0d C[%0d][%0d] = %0d expected %0d", DATAFLOW, m, n,
                                 $signed(got), $signed(32'(Cref[m][n])));
    end
  endtask

  initial begin
    int tau_end;
    finished = 0; checks = 0; failures = 0;
    b_ctrl = '0; c_ctrl = '0; a_in = '0; b_in = '0;
    for (int m = 0; m < MM; m++) for (int k = 0; k < KK; k++) A[m][k] = 16'($urandom);
    for (int n = 0; n < NN; n++) for (int k = 0; k < KK; k++) B[n][k] = 16'($urandom);
    for (int m = 0; m < MM; m++) for (int k = 0; k < KK; k++) begin
      Bv[m][k] = 16'($urandom);
      for (int n = 0; n < NN; n++) A3[m][k][n] = 16'($urandom);
    end
    for (int m = 0; m < MM; m++) for (int n = 0; n < NN; n++) begin
      Cref[m][n] = 0;
      for (int k = 0; k < KK; k++)
        if (DATAFLOW == DF_UMM) Cref[m][n] += longint'(A3[m][k][n]) * longint'(Bv[m][k]);
        else                    Cref[m][n] += longint'(A[m][k]) * longint'(B[n][k]);
    end
    @(negedge clk);
    while (!rst_n) @(negedge clk);
    // stationary B preload (STS, MTM)
    if (DATAFLOW == DF_STS || DATAFLOW == DF_MTM) begin
      for (int s = 0; s < R; s++) begin
        b_ctrl.load = 1'b1;
        for (int c = 0; c < C; c++)
          b_in[c] = (DATAFLOW == DF_STS) ? B[c][R-1-s] : B[R-1-s][c];
        @(negedge clk);
      end
      b_ctrl = '0; b_in = '0;
      b_ctrl.swap = 1'b1;
      @(negedge clk);
      b_ctrl = '0;
    end
    tau_end = LEN + R + C + LEVELS + 4;
    for (int tau = 0; tau < tau_end; tau++) begin
      // drive this cycle's boundary
      a_in = '0; b_in = '0; c_ctrl = '0;
      case (DATAFLOW)
        DF_STS: for (int r = 0; r < R; r++)
                  if (tau - r >= 0 && tau - r < MM) a_in[r] = A[tau - r][r];
        DF_SST: begin
          for (int r = 0; r < R; r++) if (tau - r >= 0 && tau - r < KK) a_in[r] = A[r][tau - r];
          for (int c = 0; c < C; c++) if (tau - c >= 0 && tau - c < KK) b_in[c] = B[c][tau - c];
          c_ctrl.capture = (tau == LEN + R + C - 1);
          c_ctrl.shift   = (tau >= LEN + R + C) && (tau < LEN + 2*R + C);
        end
        DF_MTM: for (int c = 0; c < C; c++) if (tau < MM) a_in[c] = A[tau][c];
        default: if (tau < MM)
                   for (int c = 0; c < C; c++) begin
                     b_in[c] = Bv[tau][c];
                     for (int r = 0; r < R; r++) a_in[r*C + c] = A3[tau][c][r];
                   end
      endcase
      #1;
      // check this cycle's outputs
      case (DATAFLOW)
        DF_STS: for (int c = 0; c < C; c++)
                  if (tau - R - c >= 0 && tau - R - c < MM) chk(tau - R - c, c, c_out[c]);
        DF_SST: for (int c = 0; c < C; c++) begin
                  int s;
                  s = tau - (LEN + R + C);
                  if (s >= 0 && s < R) chk(R - 1 - s, c, c_out[c]);
                end
        default: for (int r = 0; r < R; r++)
                   if (tau - 1 - LEVELS >= 0 && tau - 1 - LEVELS < MM)
                     chk(tau - 1 - LEVELS, r, c_out[r]);
      endcase
      @(negedge clk);
    end
    finished = 1;
  end
endmodule
