// tb_pe_in_direct: the multicast/unicast input module registers the bus value;
// the cell operand in cycle t+1 must equal the bus value of cycle t, whatever
// the bus carries in cycle t+1.
module tb_pe_in_direct;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [15:0] din, to_cell, prev;
  int checks = 0, failures = 0;

  pe_in_direct #(.DW(16)) dut (.clk, .rst_n, .din, .to_cell);

  initial begin
    din = 16'h1234;
    repeat (2) @(posedge clk);
    @(negedge clk);
    checks++;
    if (to_cell !== 0) begin failures++; $display("not reset"); end
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      din = 16'($urandom);
      prev = din;
      @(posedge clk);
      #1 din = ~prev;  // the bus moves on; the register must keep the sampled value
      checks++;
      if (to_cell !== prev) begin failures++; $display("got %h expected %h", to_cell, prev); end
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
