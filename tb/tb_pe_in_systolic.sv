// tb_pe_in_systolic: a chain of three systolic input modules; an element driven
// at the chain input in cycle t must be the cell operand of stage s in cycle
// t+1+s and leave the last stage one cycle after that.
module tb_pe_in_systolic;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [15:0] din, d1, d2, d3, c1, c2, c3;
  logic [15:0] hist [8];
  int checks = 0, failures = 0;

  pe_in_systolic #(.DW(16)) u1 (.clk, .rst_n, .din(din), .dout(d1), .to_cell(c1));
  pe_in_systolic #(.DW(16)) u2 (.clk, .rst_n, .din(d1), .dout(d2), .to_cell(c2));
  pe_in_systolic #(.DW(16)) u3 (.clk, .rst_n, .din(d2), .dout(d3), .to_cell(c3));

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (c1 !== 0 || c2 !== 0 || c3 !== 0) begin failures++; $display("not reset"); end
    for (int i = 0; i < 8; i++) hist[i] = '0;
    for (int t = 0; t < 200; t++) begin
      din = 16'($urandom);
      @(posedge clk);
      for (int i = 7; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = din;
      @(negedge clk);
      checks += 4;
      if (c1 !== hist[0]) failures++;
      if (c2 !== hist[1]) failures++;
      if (c3 !== hist[2]) failures++;
      if (d3 !== hist[2]) failures++;
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
