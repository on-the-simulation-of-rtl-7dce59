// tb_regfile: self-checking test of the x register file.
// Checks the reset values (x2 = stack pointer, others 0), that x0 ignores
// writes, and random writes/reads on both read ports against a shadow copy.
module tb_regfile;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [4:0] ra1, ra2, wa; logic [31:0] rd1, rd2, wd; logic we;
  int checks = 0, failures = 0;
  logic [31:0] model [32];

  regfile #(.SP_RESET(32'h1234_5670)) dut (.*);

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wa = 0; wd = 0; ra1 = 0; ra2 = 0;
    repeat (2) @(posedge clk); rst <= 0;
    for (int i = 0; i < 32; i++) model[i] = (i == 2) ? 32'h1234_5670 : 0;
    @(negedge clk);
    for (int i = 0; i < 32; i++) begin ra1 = 5'(i); ra2 = 5'(31 - i); #1;
      check(rd1, model[i], "reset p1"); check(rd2, model[31-i], "reset p2"); end
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      we = 1; wa = 5'($urandom); wd = $urandom;
      if (wa != 0) model[wa] = wd;
      @(negedge clk); we = 0;
      ra1 = 5'($urandom); ra2 = wa; #1;
      check(rd1, model[ra1], "rand p1"); check(rd2, model[ra2], "rand p2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
