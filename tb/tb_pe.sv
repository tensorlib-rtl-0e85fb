// tb_pe: one PE in each of the three module selections used by the array.
//   STS PE (A systolic, B stationary, C systolic): after loading and swapping a
//     weight w, c_out = a(t-1) * w + c_in(t-1); a_out forwards a; b_out is the
//     load chain.
//   SST PE (A, B systolic, C stationary): accumulates a*b for a stage; after
//     capture c_out shows the stage's sum.
//   MTM PE (A direct, B stationary, C direct): c_out = a(t-1) * w, unregistered.
module tb_pe;
  import tl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  stat_ctrl_t bc;
  out_ctrl_t  cc;
  logic signed [15:0] a, b;
  logic [31:0] cin;
  logic [15:0] ao0, bo0, ao1, bo1, ao2, bo2;
  logic [31:0] co0, co1, co2;
  int checks = 0, failures = 0;

  pe #(.A_FLOW(FLOW_SYSTOLIC), .B_FLOW(FLOW_STATIONARY), .C_FLOW(FLOW_SYSTOLIC)) u_sts (
    .clk, .rst_n, .a_ctrl('0), .b_ctrl(bc), .c_ctrl(cc), .a_in(a), .a_out(ao0), .b_in(b),
    .b_out(bo0), .c_in(cin), .c_out(co0));
  pe #(.A_FLOW(FLOW_SYSTOLIC), .B_FLOW(FLOW_SYSTOLIC), .C_FLOW(FLOW_STATIONARY)) u_sst (
    .clk, .rst_n, .a_ctrl('0), .b_ctrl(bc), .c_ctrl(cc), .a_in(a), .a_out(ao1), .b_in(b),
    .b_out(bo1), .c_in(cin), .c_out(co1));
  pe #(.A_FLOW(FLOW_DIRECT), .B_FLOW(FLOW_STATIONARY), .C_FLOW(FLOW_DIRECT)) u_mtm (
    .clk, .rst_n, .a_ctrl('0), .b_ctrl(bc), .c_ctrl(cc), .a_in(a), .a_out(ao2), .b_in(b),
    .b_out(bo2), .c_in(cin), .c_out(co2));

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 8) $display("%s: got %0d expected %0d", what, $signed(got), $signed(exp));
    end
  endtask

  initial begin
    logic signed [15:0] w, pa, pb;
    logic [31:0] pc;
    longint acc;
    bc = '0; cc = '0; a = '0; b = '0; cin = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // load weight w into the stationary B of u_sts and u_mtm, then swap
    w = 16'($urandom);
    @(negedge clk); bc.load = 1; b = w;
    @(negedge clk); bc.load = 0; b = '0;
    chk(32'(bo0), 32'($unsigned(w)), "sts b_out is the shadow register");
    bc.swap = 1;
    @(negedge clk); bc.swap = 0;
    // stream: STS and MTM checks; SST accumulates a*b over the same cycles
    acc = 0;
    pa = '0; pb = '0; pc = '0;
    for (int t = 0; t < 50; t++) begin
      a = 16'($urandom); b = 16'($urandom); cin = $urandom;
      @(negedge clk);
      // values registered at the edge just passed are pa/pb/pc's successors
      pa = a; pb = b; pc = cin;
      #1;
      chk(co0, 32'(longint'(pa) * longint'(w) + longint'(pc)), "sts c_out");
      chk(32'(ao0), 32'($unsigned(pa)), "sts a_out");
      chk(co2, 32'(longint'(pa) * longint'(w)), "mtm c_out");
      chk(32'(ao1), 32'($unsigned(pa)), "sst a_out");
      chk(32'(bo1), 32'($unsigned(pb)), "sst b_out");
      acc += longint'(pa) * longint'(pb);
    end
    // SST: inputs zero, capture the stage
    a = '0; b = '0;
    @(negedge clk);
    acc += 0;
    cc.capture = 1;
    @(negedge clk);
    cc.capture = 0;
    chk(co1, 32'(acc), "sst captured result");
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
