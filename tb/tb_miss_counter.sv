// tb_miss_counter: self-checking test of the miss statistics counters.
// Drives random event vectors and compares every counter, the four totals
// included, with counts kept by the testbench.
module tb_miss_counter;
  import hvsim_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [N_MISS_EV-1:0] ev;
  miss_counts_t counts;
  int checks = 0, failures = 0;
  int m [N_MISS_EV];
  int t_itlb, t_ic, t_dtlb, t_dc;
  miss_counter dut (.*);

  task automatic check(input logic [31:0] got, input int exp, input string what);
    checks++;
    if (got !== 32'(exp)) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ev = 0; t_itlb = 0; t_ic = 0; t_dtlb = 0; t_dc = 0;
    for (int i = 0; i < N_MISS_EV; i++) m[i] = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst = 0;
    for (int n = 0; n < 500; n++) begin
      ev = N_MISS_EV'($urandom);
      for (int i = 0; i < N_MISS_EV; i++) m[i] += ev[i];
      t_itlb += ev[0]; t_ic += ev[1]; t_dtlb += ev[3] + ev[6];
      t_dc += ev[2] + ev[4] + ev[5] + ev[7] + ev[8];
      @(negedge clk);
    end
    ev = 0; @(negedge clk);
    check(counts.itlb_if, m[0], "itlb_if");
    check(counts.icache_if, m[1], "icache_if");
    check(counts.dcache_pte_if, m[2], "dcache_pte_if");
    check(counts.dtlb_load, m[3], "dtlb_load");
    check(counts.dcache_data_load, m[4], "dcache_data_load");
    check(counts.dcache_pte_load, m[5], "dcache_pte_load");
    check(counts.dtlb_store, m[6], "dtlb_store");
    check(counts.dcache_wr_store, m[7], "dcache_wr_store");
    check(counts.dcache_pte_store, m[8], "dcache_pte_store");
    check(counts.total_itlb, t_itlb, "total_itlb");
    check(counts.total_icache, t_ic, "total_icache");
    check(counts.total_dtlb, t_dtlb, "total_dtlb");
    check(counts.total_dcache, t_dc, "total_dcache");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
