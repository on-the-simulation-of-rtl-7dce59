// tb_dm_tlb: self-checking test of the direct-mapped TLB.
// Cold miss, refill, hit with the refilled page number, conflict eviction
// between two pages with the same index, and a random sequence compared with
// a direct-mapped reference model.
module tb_dm_tlb;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [19:0] vpn, ppn, fill_ppn; logic hit, access;
  int checks = 0, failures = 0;
  dm_tlb #(.ENTRIES(16)) dut (.*);
  logic        mv [16];
  logic [19:0] mt [16];

  task automatic check(input logic got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %b exp %b vpn %h", what, got, exp, vpn); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    access = 0; vpn = 0; fill_ppn = 0;
    repeat (2) @(posedge clk); rst <= 0;
    for (int i = 0; i < 16; i++) mv[i] = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      vpn = (n < 4) ? 20'(n * 16 + 3) : {15'($urandom % 3), 5'($urandom)};
      fill_ppn = vpn ^ 20'hFFFFF; access = 1; #1;
      check(hit, mv[vpn[3:0]] && mt[vpn[3:0]] == vpn, "hit");
      if (hit) begin checks++; if (ppn !== (vpn ^ 20'hFFFFF)) begin failures++; $display("FAIL ppn"); end end
      mv[vpn[3:0]] = 1; mt[vpn[3:0]] = vpn;
    end
    @(negedge clk); access = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
