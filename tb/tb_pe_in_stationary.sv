// tb_pe_in_stationary: a chain of four double-buffered stationary modules.
// Four values are shifted in with load; the active registers must keep the
// previous stage's values until swap, then show the new values in chain order
// (the first value loaded in the last stage). Loading the next set while the
// current one is active checks the double buffering.
module tb_pe_in_stationary;
  import tl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  stat_ctrl_t ctrl;
  logic [15:0] ch [5];
  logic [15:0] act [4];
  logic [15:0] v [2][4];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < 4; g++) begin : g_st
    pe_in_stationary #(.DW(16)) u (.clk, .rst_n, .ctrl, .din(ch[g]), .dout(ch[g+1]),
                                   .to_cell(act[g]));
  end

  task automatic load_set(int set);
    // value v[set][i] must end in stage i: feed stage 3's value first
    for (int i = 3; i >= 0; i--) begin
      @(negedge clk);
      ctrl.load = 1'b1;
      ch[0] = v[set][i];
    end
    @(negedge clk);
    ctrl.load = 1'b0;
    ch[0] = 16'hdead;
  endtask

  task automatic expect_active(int set, string when);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (act[i] !== (set < 0 ? 16'h0 : v[set][i])) begin
        failures++;
        $display("%s: stage %0d active %h", when, i, act[i]);
      end
    end
  endtask

  initial begin
    ctrl = '0;
    ch[0] = '0;
    for (int s = 0; s < 2; s++) for (int i = 0; i < 4; i++) v[s][i] = 16'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    load_set(0);
    expect_active(-1, "before first swap");
    repeat (3) @(negedge clk);
    expect_active(-1, "hold without swap");
    ctrl.swap = 1'b1;
    @(negedge clk);
    ctrl.swap = 1'b0;
    expect_active(0, "after first swap");
    load_set(1);
    expect_active(0, "while loading next stage");
    ctrl.swap = 1'b1;
    @(negedge clk);
    ctrl.swap = 1'b0;
    expect_active(1, "after second swap");
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
