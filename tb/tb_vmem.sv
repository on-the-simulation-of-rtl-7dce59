// tb_vmem: self-checking test of the virtual memory image.
// Loads words through the loader port into all four privilege portions,
// reads them back (one-cycle read latency), checks byte-enable writes, and
// checks that the four portions are separate storage.
module tb_vmem;
  localparam int AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] addr, rdata, wdata, ld_addr, ld_data; logic re, ld_we; logic [3:0] wbe;
  int checks = 0, failures = 0;
  vmem #(.REGION_AW(AW)) dut (.*);

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk); addr = a; re = 1; wbe = 0; @(negedge clk); re = 0; d = rdata;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    re = 0; wbe = 0; ld_we = 0; addr = 0; wdata = 0; ld_addr = 0; ld_data = 0;
    // same offset in the four portions
    for (int r = 0; r < 4; r++) begin
      @(negedge clk); ld_we = 1; ld_addr = {2'(r), 30'h10}; ld_data = 32'hA000_0000 + r;
    end
    @(negedge clk); ld_we = 0;
    for (int r = 0; r < 4; r++) begin rd({2'(r), 30'h10}, d); check(d, 32'hA000_0000 + r, "portion"); end
    // byte writes
    @(negedge clk); addr = 32'h4000_0010; wdata = 32'h1122_3344; wbe = 4'b0100;
    @(negedge clk); wbe = 0;
    rd(32'h4000_0010, d); check(d, 32'hA022_0001, "byte write");
    @(negedge clk); addr = 32'h4000_0010; wdata = 32'h5566_7788; wbe = 4'b0011;
    @(negedge clk); wbe = 0;
    rd(32'h4000_0010, d); check(d, 32'hA022_7788, "half write");
    // aliasing inside a portion: offset + 4*2**AW is the same word
    rd(32'h8000_0010 + 4 * (1 << AW), d); check(d, 32'hA000_0002, "alias");
    // random words
    for (int n = 0; n < 50; n++) begin
      logic [31:0] a, v; a = {$urandom} & 32'hC000_00FC; v = $urandom;
      @(negedge clk); addr = a; wdata = v; wbe = 4'hF; @(negedge clk); wbe = 0;
      rd(a, d); check(d, v, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
