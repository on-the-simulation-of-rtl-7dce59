// tb_dm_cache: self-checking test of the direct-mapped one-word-block cache.
// Random accesses on both ports against a reference model, including same-
// cycle accesses where port B must see port A's refill, and a check that
// blocks four bytes apart use different lines.
module tb_dm_cache;
  localparam int BLOCKS = 64;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [31:0] pa_a, pa_b; logic acc_a, acc_b, hit_a, hit_b;
  int checks = 0, failures = 0;
  dm_cache #(.BLOCKS(BLOCKS)) dut (.*);
  logic        mv [BLOCKS];
  logic [31:0] mt [BLOCKS];

  function automatic logic mhit(input logic [31:0] a);
    return mv[a[7:2]] && mt[a[7:2]][31:8] == a[31:8];
  endfunction
  task automatic check(input logic got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %b exp %b", what, got, exp); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    acc_a = 0; acc_b = 0; pa_a = 0; pa_b = 0;
    repeat (2) @(posedge clk); rst <= 0;
    for (int i = 0; i < BLOCKS; i++) mv[i] = 0;
    for (int n = 0; n < 1000; n++) begin
      logic ea;
      @(negedge clk);
      pa_a = {21'($urandom % 4), 11'($urandom)} & ~32'd3;
      pa_b = ($urandom % 4 == 0) ? pa_a : ({21'($urandom % 4), 11'($urandom)} & ~32'd3);
      acc_a = $urandom % 2; acc_b = $urandom % 2; #1;
      ea = mhit(pa_a);
      check(hit_a, ea, "port A");
      if (acc_a) begin mv[pa_a[7:2]] = 1; mt[pa_a[7:2]] = pa_a; end
      check(hit_b, mhit(pa_b), "port B after A");
      if (acc_b) begin mv[pa_b[7:2]] = 1; mt[pa_b[7:2]] = pa_b; end
    end
    @(negedge clk); acc_a = 0; acc_b = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
