// controller: sequences one tile of C = A * B^T on the PE array.
//
// The schedule is the space-time mapping t = T x of the chosen dataflow: every
// bank read, PE control and result write happens in the cycle the mapping gives,
// offset by the fixed latencies of the datapath (1 cycle bank read, 1 cycle PE
// input register, LEVELS cycles of reduction tree). States:
//   IDLE     wait for start; len (1..DEPTH) is the streamed loop bound
//            (M for STS and MTM, K for SST).
//   LOAD     STS, MTM: read B banks at addresses ROWS-1 .. 0 and shift them into
//            the stationary load chains (ctrl.load one cycle after each read).
//   SWAP     STS, MTM: one cycle of b_ctrl.swap, shadow -> active registers.
//   COMPUTE  stream A (and B for SST) with the skew of the mapping, write C:
//            STS: read A bank r at m = t - r; write C bank c at m = t - ROWS - c - 1.
//            SST: read A bank r at k = t - r and B bank c at k = t - c;
//                 c_ctrl.capture at t = len + ROWS + COLS.
//            MTM: read every A bank at m = t; write C bank r at m = t - LEVELS - 2.
//            UMM: as MTM, and read every B bank at m = t as well (no LOAD/SWAP).
//   DRAIN    SST: ROWS cycles of c_ctrl.shift, writing C bank c at ROWS-1-s.
// done pulses for one cycle when the last result has been written; busy is high
// from the cycle after start to the cycle of done. *_vld tell the top that the
// bank word at the array boundary this cycle is a read issued the cycle before;
// boundary inputs are zero otherwise. Data-bank layouts per dataflow:
//   STS: A bank r: A[m][r] at m;  B bank c: B[c][k] at k;  C bank c: C[m][c] at m
//   SST: A bank r: A[r][k] at k;  B bank c: B[c][k] at k;  C bank c: C[r][c] at r
//   MTM: A bank c: A[m][c] at m;  B bank c: B[n][c] at n;  C bank r: C[m][r] at m
//   UMM: A bank r*COLS+c: A[m][c][r] at m;  B bank c: B[m][c] at m;  C bank r: C[m][r] at m
// The schedule and the FSM are this design's own construction of the controller.
module controller
  import tl_pkg::*;
#(
  parameter int unsigned ROWS     = 16,
  parameter int unsigned COLS     = 16,
  parameter dataflow_e   DATAFLOW = DF_STS,
  parameter int unsigned DEPTH    = 256,
  localparam int unsigned AW      = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned NA      = a_banks(DATAFLOW, ROWS, COLS),
  localparam int unsigned NC      = c_banks(DATAFLOW, ROWS, COLS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [AW:0]             len,
  output logic                    busy,
  output logic                    done,
  output logic [NA-1:0]           a_re,
  output logic [NA-1:0][AW-1:0]   a_raddr,
  output logic [NA-1:0]           a_vld,
  output logic [COLS-1:0]         b_re,
  output logic [COLS-1:0][AW-1:0] b_raddr,
  output logic [COLS-1:0]         b_vld,
  output stat_ctrl_t              b_ctrl,
  output out_ctrl_t               c_ctrl,
  output logic [NC-1:0]           c_we,
  output logic [NC-1:0][AW-1:0]   c_waddr
);
  localparam int LEVELS = (COLS <= 1) ? 1 : $clog2(COLS);
  localparam int R = int'(ROWS);
  localparam int C = int'(COLS);
  localparam bit HAS_LOAD = (DATAFLOW == DF_STS || DATAFLOW == DF_MTM);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SWAP, S_COMPUTE, S_DRAIN} state_e;

  state_e state, state_n;
  int     t, t_n;       // cycle within the current state
  int     n, n_q;       // streamed loop bound of the running tile
  int     t_last;       // last COMPUTE cycle
  logic   done_n;

  always_comb begin
    case (DATAFLOW)
      DF_STS:  t_last = n_q + R + C - 1;
      DF_SST:  t_last = n_q + R + C;
      default: t_last = n_q + LEVELS + 1;
    endcase
  end

  // Next state.
  always_comb begin
    state_n = state;
    t_n     = t + 1;
    n       = n_q;
    done_n  = 1'b0;
    case (state)
      S_IDLE: begin
        t_n = 0;
        if (start) begin
          n       = int'(len);
          state_n = HAS_LOAD ? S_LOAD : S_COMPUTE;
        end
      end
      S_LOAD: if (t == R) begin state_n = S_SWAP; t_n = 0; end
      S_SWAP: begin state_n = S_COMPUTE; t_n = 0; end
      S_COMPUTE:
        if (t == t_last) begin
          t_n = 0;
          if (DATAFLOW == DF_SST) state_n = S_DRAIN;
          else begin state_n = S_IDLE; done_n = 1'b1; end
        end
      S_DRAIN: if (t == R - 1) begin state_n = S_IDLE; t_n = 0; done_n = 1'b1; end
      default: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t     <= 0;
      n_q   <= 0;
      done  <= 1'b0;
      a_vld <= '0;
      b_vld <= '0;
    end else begin
      state <= state_n;
      t     <= t_n;
      n_q   <= n;
      done  <= done_n;
      a_vld <= a_re;
      b_vld <= b_re;
    end
  end

  assign busy = (state != S_IDLE);

  // Bank reads, PE controls and result writes of the current cycle.
  always_comb begin
    a_re    = '0;
    a_raddr = '0;
    b_re    = '0;
    b_raddr = '0;
    c_we    = '0;
    c_waddr = '0;
    b_ctrl  = '0;
    c_ctrl  = '0;
    case (state)
      S_LOAD: begin
        for (int c = 0; c < C; c++) begin
          b_re[c]    = (t < R);
          b_raddr[c] = AW'(R - 1 - t);
        end
        b_ctrl.load = (t >= 1);
      end
      S_SWAP: b_ctrl.swap = 1'b1;
      S_COMPUTE: begin
        case (DATAFLOW)
          DF_STS: begin
            for (int r = 0; r < R; r++) begin
              a_re[r]    = (t - r >= 0) && (t - r < n_q);
              a_raddr[r] = AW'(t - r);
            end
            for (int c = 0; c < C; c++) begin
              c_we[c]    = (t - R - c - 1 >= 0) && (t - R - c - 1 < n_q);
              c_waddr[c] = AW'(t - R - c - 1);
            end
          end
          DF_SST: begin
            for (int r = 0; r < R; r++) begin
              a_re[r]    = (t - r >= 0) && (t - r < n_q);
              a_raddr[r] = AW'(t - r);
            end
            for (int c = 0; c < C; c++) begin
              b_re[c]    = (t - c >= 0) && (t - c < n_q);
              b_raddr[c] = AW'(t - c);
            end
            c_ctrl.capture = (t == t_last);
          end
          default: begin
            for (int i = 0; i < int'(NA); i++) begin
              a_re[i]    = (t < n_q);
              a_raddr[i] = AW'(t);
            end
            if (DATAFLOW == DF_UMM)
              for (int c = 0; c < C; c++) begin
                b_re[c]    = (t < n_q);
                b_raddr[c] = AW'(t);
              end
            for (int r = 0; r < R; r++) begin
              c_we[r]    = (t - LEVELS - 2 >= 0) && (t - LEVELS - 2 < n_q);
              c_waddr[r] = AW'(t - LEVELS - 2);
            end
          end
        endcase
      end
      S_DRAIN: begin
        c_ctrl.shift = 1'b1;
        for (int c = 0; c < C; c++) begin
          c_we[c]    = 1'b1;
          c_waddr[c] = AW'(R - 1 - t);
        end
      end
      default: ;
    endcase
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   start && !busy |-> (len >= 1) && (32'(len) <= DEPTH))
    else $error("controller: len must be 1..DEPTH");
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("controller: start while busy is ignored");
  initial assert (!HAS_LOAD || ROWS <= DEPTH)
    else $error("controller: a stationary column needs ROWS words in a B bank");
endmodule
