// tb_mem_bank: writes random words to every address of a 64-word bank, reads
// them back in random order with the one-cycle read latency, checks that rdata
// holds while re is low and that a read of the address being written returns
// the old word.
module tb_mem_bank;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [31:0] wdata, rdata, held;
  logic [31:0] model [64];
  int checks = 0, failures = 0;

  mem_bank #(.W(32), .DEPTH(64)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 300; i++) begin
      int ad;
      ad = $urandom % 64;
      @(negedge clk);
      re = 1; raddr = 6'(ad);
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== model[ad]) begin failures++; $display("addr %0d: %h vs %h", ad, rdata, model[ad]); end
      held = rdata;
      @(negedge clk);
      checks++;
      if (rdata !== held) begin failures++; $display("rdata did not hold"); end
    end
    // read during write of the same address: old data
    @(negedge clk);
    we = 1; waddr = 6'd5; wdata = ~model[5]; re = 1; raddr = 6'd5;
    @(negedge clk);
    we = 0; re = 0;
    checks++;
    if (rdata !== model[5]) begin failures++; $display("read-during-write not old data"); end
    model[5] = ~model[5];
    re = 1;
    @(negedge clk);
    re = 0;
    checks++;
    if (rdata !== model[5]) begin failures++; $display("write lost"); end
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
