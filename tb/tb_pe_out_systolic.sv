// tb_pe_out_systolic: a column of three systolic output modules, each with its
// own comp_cell and constant operands w[s]; a partial sum entering the column in
// cycle t must leave it in cycle t+3 increased by x[s]*w[s] of the stage and
// cycle it passed (x changes every cycle).
module tb_pe_out_systolic;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic signed [15:0] w [3];
  logic signed [15:0] x [3];
  logic [31:0] p [4];
  logic [31:0] add [3], s [3];
  int checks = 0, failures = 0;
  longint exp_hist [16];
  longint xs [16][3];

  for (genvar g = 0; g < 3; g++) begin : g_st
    comp_cell #(.DW(16), .ACC_W(32)) u_cell (.a(x[g]), .b(w[g]), .addend(add[g]), .sum(s[g]));
    pe_out_systolic #(.ACC_W(32)) u_out (.clk, .rst_n, .psum_in(p[g]), .addend(add[g]),
                                         .cell_sum(s[g]), .psum_out(p[g+1]));
  end

  initial begin
    int cyc;
    for (int i = 0; i < 3; i++) begin w[i] = 16'($urandom); x[i] = '0; end
    p[0] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 16; i++) exp_hist[i] = 0;
    for (cyc = 0; cyc < 300; cyc++) begin
      @(negedge clk);
      // record what enters now and the operands each stage uses now
      for (int i = 15; i > 0; i--) begin exp_hist[i] = exp_hist[i-1]; xs[i] = xs[i-1]; end
      p[0] = 32'($urandom);
      for (int i = 0; i < 3; i++) x[i] = 16'($urandom);
      exp_hist[0] = longint'(p[0]);
      for (int i = 0; i < 3; i++) xs[0][i] = longint'(x[i]);
      #1;
      // psum that entered 3 cycles ago leaves now: it used stage s's x of cycle (entry+1+s)
      if (cyc >= 4) begin
        longint e;
        e = exp_hist[3] + xs[2][0] * longint'(w[0]) + xs[1][1] * longint'(w[1]) +
            xs[0][2] * longint'(w[2]);
        checks++;
        if (p[3] !== 32'(e)) begin
          failures++;
          if (failures < 5) $display("cycle %0d: out %0d expected %0d", cyc, p[3], 32'(e));
        end
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
