// tb_hvsim_top: end-to-end test of the whole simulator.
//
// Two copies of the top run side by side on the same software: one built as
// a non-virtualized system (VIRTUALIZED=0: user program in U-mode, operating
// system in HS-mode) and one as a virtualized system (VIRTUALIZED=1: user
// program in VU-mode, guest OS in VS-mode, hypervisor in HS-mode). Each runs
// two workloads in turn: a linear search over 128 words and a bubble sort of
// 24 words, both ending with a write system call that prints the result on
// the console and the exit system call. The memory image is written through
// the loader port while reset is held.
//
// Checked, per run and copy:
//  * the console bytes equal the result computed here (index of the first
//    match; the sorted values);
//  * instructions retire in order, numbered 0,1,2,..., the last one being
//    the exit call, and `done` rises;
//  * the miss totals equal the sums of their parts, the retired count equals
//    the instruction count, and cycles >= instructions + 4 (pipeline fill);
//  * the virtualized run executes exactly GUEST_LEN more instructions (one
//    pass through the guest handler) and takes more cycles.
// Over all runs each mechanism must have happened at least once: load-use
// stall, branch-operand stall, structural stall on the D-cache, IF flush,
// operand forwarding, every mode switch (U<->HS, VU->VS->HS->VS->VU), I-TLB,
// I-cache, D-TLB, D-cache data/write/PTE misses and a PTE hit after a TLB
// miss; each that never happened counts as a failure.
module tb_hvsim_top;
  import hvsim_pkg::*;
  import rv_asm_pkg::*;
  import hv_programs_pkg::*;

  localparam int SEARCH_N = 128;
  localparam int SORT_N   = 24;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic        ld_we;
  logic [31:0] ld_addr, ld_data;

  // index 0: non-virtualized, index 1: virtualized
  logic         out_valid[2], ret_valid[2], done[2];
  logic [7:0]   out_byte[2];
  logic [31:0]  ret_num[2], cycle_count[2];
  trace_t       ret_trace[2];
  miss_counts_t mc[2];
  pipe_stats_t  st[2];

  hvsim_top #(.VIRTUALIZED(1'b0), .REGION_AW(14)) u_nv (
    .clk, .rst, .e_entry(32'h0), .ld_we, .ld_addr, .ld_data,
    .out_valid(out_valid[0]), .out_byte(out_byte[0]), .ret_valid(ret_valid[0]),
    .ret_num(ret_num[0]), .ret_trace(ret_trace[0]), .cycle_count(cycle_count[0]),
    .miss_counts(mc[0]), .stats(st[0]), .done(done[0]));

  hvsim_top #(.VIRTUALIZED(1'b1), .REGION_AW(14)) u_v (
    .clk, .rst, .e_entry(32'h0), .ld_we, .ld_addr, .ld_data,
    .out_valid(out_valid[1]), .out_byte(out_byte[1]), .ret_valid(ret_valid[1]),
    .ret_num(ret_num[1]), .ret_trace(ret_trace[1]), .cycle_count(cycle_count[1]),
    .miss_counts(mc[1]), .stats(st[1]), .done(done[1]));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ monitors
  logic [7:0]  outq[2][$];
  int          n_ret[2], order_err[2], exit_ret[2];
  logic [2:0]  last_mode[2];
  int          sw_u_hs, sw_hs_u, sw_vu_vs, sw_vs_hs, sw_hs_vs, sw_vs_vu;

  function automatic logic [2:0] mode(input trace_t t);
    return {t.virt, t.priv};
  endfunction

  for (genvar g = 0; g < 2; g++) begin : g_mon
    always @(posedge clk) begin
      if (!rst && out_valid[g]) outq[g].push_back(out_byte[g]);
      if (!rst && ret_valid[g]) begin
        if (ret_num[g] != 32'(n_ret[g])) order_err[g]++;
        if (ret_trace[g].exit_call) exit_ret[g]++;
        if (n_ret[g] > 0 && mode(ret_trace[g]) != last_mode[g]) begin
          unique case ({last_mode[g], mode(ret_trace[g])})
            {3'b000, 3'b001}: sw_u_hs++;
            {3'b001, 3'b000}: sw_hs_u++;
            {3'b100, 3'b101}: sw_vu_vs++;
            {3'b101, 3'b001}: sw_vs_hs++;
            {3'b001, 3'b101}: sw_hs_vs++;
            {3'b101, 3'b100}: sw_vs_vu++;
            default: begin
              failures++;
              $display("FAIL: unexpected mode switch %b -> %b", last_mode[g], mode(ret_trace[g]));
            end
          endcase
        end
        last_mode[g] <= mode(ret_trace[g]);
        n_ret[g]++;
      end
    end
  end

  // ------------------------------------------------------------ loading
  task automatic put(input logic [31:0] a, d);
    @(negedge clk);
    ld_we = 1'b1; ld_addr = a; ld_data = d;
  endtask

  task automatic put_block(input logic [31:0] base, input words_t w);
    foreach (w[i]) put(base + 32'(4 * i), w[i]);
  endtask

  // ------------------------------------------------------------ one run
  longint sum_ld_use, sum_br, sum_struct, sum_flush, sum_fwd;
  longint sum_itlb, sum_ic, sum_dtlb, sum_dc_data, sum_dc_wr, sum_dc_pte, sum_pte_hit;

  task automatic run(input string name, input words_t prog, input logic [31:0] data[],
                     input logic [7:0] expect_out[$]);
    int cyc;
    rst = 1'b1;
    repeat (2) @(negedge clk);
    put_block(32'h0000_0000, prog);
    put_block(32'h4000_0000, guest_handler());
    put_block(32'h8000_0000, write_handler());
    foreach (data[i]) put(32'h0000_0400 + 32'(4 * i), data[i]);
    @(negedge clk);
    ld_we = 1'b0;
    for (int g = 0; g < 2; g++) begin
      outq[g].delete(); n_ret[g] = 0; order_err[g] = 0; exit_ret[g] = 0;
    end
    rst = 1'b0;
    cyc = 0;
    while (!(done[0] && done[1]) && cyc < 1_500_000) begin
      @(negedge clk);
      cyc++;
    end
    repeat (3) @(negedge clk);
    for (int g = 0; g < 2; g++) begin
      string who = $sformatf("%s/%s", name, g ? "virt" : "nonvirt");
      check(done[g], {who, ": done"});
      check(outq[g] == expect_out, {who, ": console output"});
      check(order_err[g] == 0 && n_ret[g] > 0, {who, ": in-order numbering"});
      check(exit_ret[g] == 1, {who, ": one exit call retired"});
      check(st[g].retired == 32'(n_ret[g]), {who, ": retired count"});
      check(mc[g].total_itlb == mc[g].itlb_if, {who, ": I-TLB total"});
      check(mc[g].total_icache == mc[g].icache_if, {who, ": I-cache total"});
      check(mc[g].total_dtlb == mc[g].dtlb_load + mc[g].dtlb_store, {who, ": D-TLB total"});
      check(mc[g].total_dcache == mc[g].dcache_pte_if + mc[g].dcache_data_load
              + mc[g].dcache_pte_load + mc[g].dcache_wr_store + mc[g].dcache_pte_store,
            {who, ": D-cache total"});
      check(cycle_count[g] >= st[g].retired + 32'd4, {who, ": cycles >= instructions + 4"});
      $display("%-16s instructions=%0d cycles=%0d itlb=%0d icache=%0d dtlb=%0d dcache=%0d ld_use=%0d br=%0d struct=%0d flush=%0d fwd=%0d",
               who, st[g].retired, cycle_count[g], mc[g].total_itlb, mc[g].total_icache,
               mc[g].total_dtlb, mc[g].total_dcache, st[g].load_use_stalls, st[g].branch_stalls,
               st[g].struct_stalls, st[g].flushes, st[g].forwards);
      sum_ld_use  += st[g].load_use_stalls;
      sum_br      += st[g].branch_stalls;
      sum_struct  += st[g].struct_stalls;
      sum_flush   += st[g].flushes;
      sum_fwd     += st[g].forwards;
      sum_itlb    += mc[g].total_itlb;
      sum_ic      += mc[g].total_icache;
      sum_dtlb    += mc[g].total_dtlb;
      sum_dc_data += mc[g].dcache_data_load;
      sum_dc_wr   += mc[g].dcache_wr_store;
      sum_dc_pte  += mc[g].dcache_pte_if + mc[g].dcache_pte_load + mc[g].dcache_pte_store;
      sum_pte_hit += mc[g].total_itlb + mc[g].total_dtlb - mc[g].dcache_pte_if
                     - mc[g].dcache_pte_load - mc[g].dcache_pte_store;
    end
    check(st[1].retired == st[0].retired + GUEST_LEN, {name, ": virtualized runs the guest handler once more"});
    check(cycle_count[1] > cycle_count[0], {name, ": virtualized takes more cycles"});
  endtask

  task automatic need(input longint n, input string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism never happened: %s", what);
    end else begin
      $display("mechanism %-28s %0d", what, n);
    end
  endtask

  // ------------------------------------------------------------ stimulus
  initial begin
    logic [31:0] a[];
    logic [7:0]  exp_out[$];
    int          k, idx;
    ld_we = 1'b0; ld_addr = '0; ld_data = '0;
    sw_u_hs = 0; sw_hs_u = 0; sw_vu_vs = 0; sw_vs_hs = 0; sw_hs_vs = 0; sw_vs_vu = 0;
    sum_ld_use = 0; sum_br = 0; sum_struct = 0; sum_flush = 0; sum_fwd = 0;
    sum_itlb = 0; sum_ic = 0; sum_dtlb = 0; sum_dc_data = 0; sum_dc_wr = 0; sum_dc_pte = 0;
    sum_pte_hit = 0;

    // linear search: key taken from the upper half of the array
    a = new[SEARCH_N + 1];
    for (int i = 0; i < SEARCH_N; i++) a[i] = $urandom_range(0, 999);
    k = $urandom_range(SEARCH_N / 2, SEARCH_N - 1);
    a[SEARCH_N] = a[k];
    idx = -1;
    for (int i = SEARCH_N - 1; i >= 0; i--) if (a[i] == a[SEARCH_N]) idx = i;
    exp_out = '{8'(idx)};
    run("search", search_user(SEARCH_N), a, exp_out);

    // bubble sort
    a = new[SORT_N];
    for (int i = 0; i < SORT_N; i++) a[i] = $urandom_range(0, 255);
    a.sort();
    exp_out = {};
    foreach (a[i]) exp_out.push_back(8'(a[i]));
    a.shuffle();
    run("sort", sort_user(SORT_N), a, exp_out);

    need(sum_ld_use, "load-use stall");
    need(sum_br, "branch operand stall");
    need(sum_struct, "D-cache structural stall");
    need(sum_flush, "IF flush after taken branch");
    need(sum_fwd, "operand forwarding");
    need(sw_u_hs, "switch U -> HS");
    need(sw_hs_u, "switch HS -> U");
    need(sw_vu_vs, "switch VU -> VS");
    need(sw_vs_hs, "switch VS -> HS");
    need(sw_hs_vs, "switch HS -> VS");
    need(sw_vs_vu, "switch VS -> VU");
    need(sum_itlb, "I-TLB miss");
    need(sum_ic, "I-cache miss");
    need(sum_dtlb, "D-TLB miss");
    need(sum_dc_data, "D-cache load miss");
    need(sum_dc_wr, "D-cache write miss");
    need(sum_dc_pte, "D-cache PTE miss");
    need(sum_pte_hit, "PTE hit after a TLB miss");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
