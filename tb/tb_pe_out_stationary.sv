// tb_pe_out_stationary: a chain of three stationary output modules, each with a
// comp_cell fed random operands. Every PE accumulates its products over a stage
// of random length; capture ends the stage (the capture cycle's product starts
// the next stage), and shift moves the captured results to the chain end, last
// PE first. Results of three consecutive stages are compared with sums kept here.
module tb_pe_out_stationary;
  import tl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  out_ctrl_t ctrl;
  logic signed [15:0] a [3], b [3];
  logic [31:0] ch [4], add [3], s [3];
  longint acc [3], done_acc [3];
  int checks = 0, failures = 0;

  assign ch[0] = 32'h0;
  for (genvar g = 0; g < 3; g++) begin : g_st
    comp_cell #(.DW(16), .ACC_W(32)) u_cell (.a(a[g]), .b(b[g]), .addend(add[g]), .sum(s[g]));
    pe_out_stationary #(.ACC_W(32)) u (.clk, .rst_n, .ctrl, .chain_in(ch[g]),
                                       .chain_out(ch[g+1]), .addend(add[g]), .cell_sum(s[g]));
  end

  // One cycle of operands; track the reference accumulators.
  task automatic step(bit cap, bit sh);
    @(negedge clk);
    ctrl.capture = cap;
    ctrl.shift   = sh;
    for (int i = 0; i < 3; i++) begin
      a[i] = 16'($urandom);
      b[i] = 16'($urandom);
      if (cap) begin done_acc[i] = acc[i]; acc[i] = 0; end
      acc[i] += longint'(a[i]) * longint'(b[i]);
    end
  endtask

  initial begin
    ctrl = '0;
    for (int i = 0; i < 3; i++) begin a[i] = '0; b[i] = '0; acc[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int stage = 0; stage < 3; stage++) begin
      int len;
      len = 3 + ($urandom % 10);
      for (int c = 0; c < len; c++) step(0, 0);
      step(1, 0);
      // drain while the next stage accumulates: chain end shows PE2, PE1, PE0
      for (int d = 0; d < 3; d++) begin
        @(posedge clk);
        #1;
        checks++;
        if (ch[3] !== 32'(done_acc[2 - d])) begin
          failures++;
          $display("stage %0d drain %0d: got %0d expected %0d", stage, d, $signed(ch[3]),
                   $signed(32'(done_acc[2 - d])));
        end
        step(0, 1);
      end
    end
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
