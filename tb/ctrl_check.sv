// ctrl_check: test helper that runs one controller alone and checks its
// schedule: per bank, the number, order, address and cycle of reads and writes,
// the load/swap/capture/shift controls and the cycle of done, all against the
// space-time schedule of the dataflow written out here (times in cycles from
// the first COMPUTE cycle, tc = 0; LOAD starts at the cycle after start).
module ctrl_check
  import tl_pkg::*;
#(
  parameter int unsigned ROWS     = 4,
  parameter int unsigned COLS     = 5,
  parameter dataflow_e   DATAFLOW = DF_STS,
  parameter int unsigned LEN      = 7
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int unsigned DEPTH = 16, AW = 4;
  localparam int NA = a_banks(DATAFLOW, ROWS, COLS);
  localparam int NC = c_banks(DATAFLOW, ROWS, COLS);
  localparam int R = ROWS, C = COLS;
  localparam int LEVELS = (COLS <= 1) ? 1 : $clog2(COLS);
  localparam bit PRELOAD = (DATAFLOW == DF_STS || DATAFLOW == DF_MTM);
  localparam int PRE = PRELOAD ? R + 2 : 0;  // LOAD + SWAP cycles

  logic start, busy, done;
  logic [AW:0] len;
  logic [NA-1:0] a_re, a_vld;
  logic [NA-1:0][AW-1:0] a_raddr;
  logic [COLS-1:0] b_re, b_vld;
  logic [COLS-1:0][AW-1:0] b_raddr;
  stat_ctrl_t b_ctrl;
  out_ctrl_t  c_ctrl;
  logic [NC-1:0] c_we;
  logic [NC-1:0][AW-1:0] c_waddr;

  controller #(.ROWS(ROWS), .COLS(COLS), .DATAFLOW(DATAFLOW), .DEPTH(DEPTH)) dut (.*);

  int cyc;   // cycles since the start edge; LOAD (or COMPUTE for SST) is cyc = 0
  bit running;

  task automatic want(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("ctrl df=%0d cycle %0d: %s", DATAFLOW, cyc, what);
    end
  endtask

  // Expected activity in cycle cyc.
  always @(negedge clk) if (running) begin
    int tc;
    tc = cyc - PRE;
    for (int i = 0; i < NA; i++) begin
      int sk, m;
      sk = (DATAFLOW == DF_MTM || DATAFLOW == DF_UMM) ? 0 : i;
      m  = tc - sk;
      want(a_re[i] == (m >= 0 && m < int'(LEN)), "a_re");
      if (a_re[i]) want(int'(a_raddr[i]) == m, "a_raddr");
    end
    for (int c = 0; c < C; c++) begin
      if (DATAFLOW == DF_SST) begin
        want(b_re[c] == (tc - c >= 0 && tc - c < int'(LEN)), "b_re (systolic)");
        if (b_re[c]) want(int'(b_raddr[c]) == tc - c, "b_raddr (systolic)");
      end else if (DATAFLOW == DF_UMM) begin
        want(b_re[c] == (tc >= 0 && tc < int'(LEN)), "b_re (multicast)");
        if (b_re[c]) want(int'(b_raddr[c]) == tc, "b_raddr (multicast)");
      end else begin
        want(b_re[c] == (cyc < R), "b_re (preload)");
        if (b_re[c]) want(int'(b_raddr[c]) == R - 1 - cyc, "b_raddr (preload)");
      end
    end
    want(b_ctrl.load == (PRELOAD && cyc >= 1 && cyc <= R), "b_ctrl.load");
    want(b_ctrl.swap == (PRELOAD && cyc == R + 1), "b_ctrl.swap");
    want(c_ctrl.capture == (DATAFLOW == DF_SST && tc == int'(LEN) + R + C), "c_ctrl.capture");
    want(c_ctrl.shift == (DATAFLOW == DF_SST && tc > int'(LEN) + R + C &&
                          tc <= int'(LEN) + 2*R + C), "c_ctrl.shift");
    for (int j = 0; j < NC; j++) begin
      int m;
      case (DATAFLOW)
        DF_STS:  m = tc - R - j - 1;
        DF_SST:  m = R - 1 - (tc - (int'(LEN) + R + C + 1));
        default: m = tc - LEVELS - 2;
      endcase
      if (DATAFLOW == DF_SST)
        want(c_we[j] == (tc > int'(LEN) + R + C && tc <= int'(LEN) + 2*R + C), "c_we (drain)");
      else
        want(c_we[j] == (m >= 0 && m < int'(LEN)), "c_we");
      if (c_we[j]) want(int'(c_waddr[j]) == m, "c_waddr");
    end
  end

  initial begin
    int exp_done;
    finished = 0; checks = 0; failures = 0; running = 0; cyc = 0;
    start = 0; len = '0;
    exp_done = (DATAFLOW == DF_STS) ? PRE + int'(LEN) + R + C :
               (DATAFLOW == DF_SST) ? int'(LEN) + 2*R + C + 1 :
                                      PRE + int'(LEN) + LEVELS + 2;
    @(negedge clk);
    while (!rst_n) @(negedge clk);
    start = 1; len = (AW+1)'(LEN);
    @(negedge clk);
    start = 0;
    running = 1;
    cyc = 0;
    while (!done && cyc < 1000) begin
      @(negedge clk);
      cyc++;
    end
    running = 0;
    want(cyc == exp_done, "done cycle");
    if (cyc != exp_done) $display("ctrl df=%0d done at %0d, expected %0d", DATAFLOW, cyc, exp_done);
    @(negedge clk);
    want(!busy, "idle after done");
    finished = 1;
  end
endmodule
