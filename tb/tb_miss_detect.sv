// tb_miss_detect: self-checking test of the miss detection unit.
// A 4-entry TLB and 64-block caches make conflicts easy to provoke. The
// expected stage cycle counts are worked out by hand from the penalties
// (100 for every miss and for the write-through memory write, 1 for a page
// table entry that hits in the D-cache), and the miss counters are checked
// at the end.
module tb_miss_detect;
  import hvsim_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] if_va, mem_va; logic if_tlb_miss, if_start, mem_load, mem_store, mem_start;
  logic [9:0] if_cycles, mem_cycles; logic [N_MISS_EV-1:0] ev; miss_counts_t counts;

  miss_detect #(.ICACHE_BLOCKS(64), .DCACHE_BLOCKS(64), .ITLB_ENTRIES(4), .DTLB_ENTRIES(4)) dut (.*);

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask
  task automatic fetch(input logic [31:0] va, input int cyc, input string what);
    @(negedge clk); if_va = va; if_start = 1; #1; check(32'(if_cycles), cyc, what);
    @(negedge clk); if_start = 0;
  endtask
  task automatic mem(input logic [31:0] va, input logic ld, st, input int cyc, input string what);
    @(negedge clk); mem_va = va; mem_load = ld; mem_store = st; mem_start = 1; #1;
    check(32'(mem_cycles), cyc, what);
    @(negedge clk); mem_start = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    if_va = 0; mem_va = 0; if_start = 0; mem_start = 0; mem_load = 0; mem_store = 0;
    repeat (2) @(negedge clk); rst = 0;
    fetch(32'h0000_1000, 201, "cold fetch: I-TLB, PTE and I-cache miss");
    fetch(32'h0000_1004, 101, "same page, new block: I-cache miss");
    fetch(32'h0000_1000, 1,   "all hit");
    fetch(32'h0000_5000, 201, "conflicting page");
    fetch(32'h0000_1000, 102, "I-TLB evicted, PTE hits in D-cache, I-cache evicted");
    mem(32'h0000_3000, 1, 0, 201, "cold load");
    mem(32'h0000_3000, 1, 0, 1,   "load hit");
    mem(32'h0000_3004, 0, 1, 201, "store write miss + memory write");
    mem(32'h0000_3004, 0, 1, 101, "store hit + memory write");
    mem(32'h0000_3004, 0, 0, 1,   "no memory access");
    mem(32'h0000_7000, 0, 1, 301, "store: D-TLB, PTE and write miss");
    @(negedge clk);
    check(counts.itlb_if, 3, "itlb_if");
    check(counts.icache_if, 4, "icache_if");
    check(counts.dcache_pte_if, 2, "dcache_pte_if");
    check(counts.dtlb_load, 1, "dtlb_load");
    check(counts.dcache_data_load, 1, "dcache_data_load");
    check(counts.dcache_pte_load, 1, "dcache_pte_load");
    check(counts.dtlb_store, 1, "dtlb_store");
    check(counts.dcache_wr_store, 2, "dcache_wr_store");
    check(counts.dcache_pte_store, 1, "dcache_pte_store");
    check(counts.total_dtlb, 2, "total_dtlb");
    check(counts.total_dcache, 7, "total_dcache");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
