// tb_comp_cell: checks sum = a*b + addend of the computation cell on corner
// values and 2000 random signed operands against 64-bit arithmetic.
module tb_comp_cell;
  logic signed [15:0] a, b;
  logic signed [31:0] addend, sum;
  int checks = 0, failures = 0;

  comp_cell #(.DW(16), .ACC_W(32)) dut (.a, .b, .addend, .sum);

  task automatic try(logic signed [15:0] ta, logic signed [15:0] tb_, logic signed [31:0] tc);
    longint e;
    a = ta; b = tb_; addend = tc;
    #1;
    e = longint'(ta) * longint'(tb_) + longint'(tc);
    checks++;
    if (sum !== 32'(e)) begin
      failures++;
      $display("comp_cell: %0d*%0d+%0d = %0d, expected %0d", ta, tb_, tc, sum, 32'(e));
    end
  endtask

  initial begin
    try(16'sh7fff, 16'sh7fff, 0);
    try(-16'sh8000, -16'sh8000, 0);
    try(-16'sh8000, 16'sh7fff, -1);
    try(-3, 5, 100);
    for (int i = 0; i < 2000; i++) try(16'($urandom), 16'($urandom), 32'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
