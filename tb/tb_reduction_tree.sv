// tb_reduction_tree: trees of 16 and 5 inputs (the second padded to 8) and of 1
// input get a new random input set every cycle; each output must equal the sum
// of the set presented clog2(N) cycles before (1 cycle for N = 1).
module tb_reduction_tree;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [15:0][31:0] d16;
  logic [4:0][31:0]  d5;
  logic [0:0][31:0]  d1;
  logic [31:0] o16, o5, o1;
  logic [31:0] h16 [8], h5 [8], h1 [8];
  int checks = 0, failures = 0;

  reduction_tree #(.N(16), .ACC_W(32)) u16 (.clk, .rst_n, .din(d16), .dout(o16));
  reduction_tree #(.N(5),  .ACC_W(32)) u5  (.clk, .rst_n, .din(d5),  .dout(o5));
  reduction_tree #(.N(1),  .ACC_W(32)) u1  (.clk, .rst_n, .din(d1),  .dout(o1));

  initial begin
    d16 = '0; d5 = '0; d1 = '0;
    for (int i = 0; i < 8; i++) begin h16[i] = 0; h5[i] = 0; h1[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int i = 7; i > 0; i--) begin h16[i] = h16[i-1]; h5[i] = h5[i-1]; h1[i] = h1[i-1]; end
      h16[0] = 0; h5[0] = 0;
      for (int i = 0; i < 16; i++) begin d16[i] = $urandom; h16[0] += d16[i]; end
      for (int i = 0; i < 5; i++)  begin d5[i]  = $urandom; h5[0]  += d5[i];  end
      d1[0] = $urandom; h1[0] = d1[0];
      #1;
      if (t >= 5) begin
        checks += 3;
        if (o16 !== h16[4]) begin failures++; $display("N=16 t=%0d: %h vs %h", t, o16, h16[4]); end
        if (o5  !== h5[3])  begin failures++; $display("N=5 t=%0d: %h vs %h", t, o5, h5[3]); end
        if (o1  !== h1[1])  begin failures++; $display("N=1 t=%0d: %h vs %h", t, o1, h1[1]); end
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
