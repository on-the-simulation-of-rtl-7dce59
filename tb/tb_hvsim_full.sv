// tb_hvsim_full: one complete run of the simulator at its default sizes.
//
// The top is instantiated with no parameter overrides: virtualized system,
// 4096-block I- and D-caches, 16-entry TLBs, 100-cycle miss penalties and
// 2^24 words (64 MiB) per address portion. The virtualized bubble sort of
// 32 words runs from reset to the exit system call: user program in
// VU-mode, guest OS handler in VS-mode, hypervisor handler in HS-mode.
//
// Checked: the console shows the sorted values, `done` rises, instructions
// retire in order with exactly one exit call, the miss totals equal the sums
// of their parts, cycles >= instructions + 4, and the four mode switches of
// one system call (VU->VS->HS->VS->VU) all appear in the retired trace.
module tb_hvsim_full;
  import hvsim_pkg::*;
  import rv_asm_pkg::*;
  import hv_programs_pkg::*;

  localparam int SORT_N = 32;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic         ld_we;
  logic [31:0]  ld_addr, ld_data;
  logic         out_valid, ret_valid, done;
  logic [7:0]   out_byte;
  logic [31:0]  ret_num, cycle_count;
  trace_t       ret_trace;
  miss_counts_t mc;
  pipe_stats_t  st;

  hvsim_top dut (
    .clk, .rst, .e_entry(32'h0), .ld_we, .ld_addr, .ld_data, .out_valid, .out_byte,
    .ret_valid, .ret_num, .ret_trace, .cycle_count, .miss_counts(mc), .stats(st), .done);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [7:0] outq[$];
  int         n_ret = 0, order_err = 0, exit_ret = 0, switches = 0;
  logic [2:0] last_mode;

  always @(posedge clk) begin
    if (!rst && out_valid) outq.push_back(out_byte);
    if (!rst && ret_valid) begin
      if (ret_num != 32'(n_ret)) order_err++;
      if (ret_trace.exit_call) exit_ret++;
      if (n_ret > 0 && {ret_trace.virt, ret_trace.priv} != last_mode) switches++;
      last_mode <= {ret_trace.virt, ret_trace.priv};
      n_ret++;
    end
  end

  task automatic put(input logic [31:0] a, d);
    @(negedge clk);
    ld_we = 1'b1; ld_addr = a; ld_data = d;
  endtask

  task automatic put_block(input logic [31:0] base, input words_t w);
    foreach (w[i]) put(base + 32'(4 * i), w[i]);
  endtask

  initial begin
    logic [31:0] a[];
    logic [7:0]  exp_out[$];
    int          cyc;
    ld_we = 1'b0; ld_addr = '0; ld_data = '0;
    a = new[SORT_N];
    for (int i = 0; i < SORT_N; i++) a[i] = $urandom_range(0, 255);
    a.sort();
    foreach (a[i]) exp_out.push_back(8'(a[i]));
    a.shuffle();

    repeat (2) @(negedge clk);
    put_block(32'h0000_0000, sort_user(SORT_N));
    put_block(32'h4000_0000, guest_handler());
    put_block(32'h8000_0000, write_handler());
    foreach (a[i]) put(32'h0000_0400 + 32'(4 * i), a[i]);
    @(negedge clk);
    ld_we = 1'b0;
    rst = 1'b0;
    cyc = 0;
    while (!done && cyc < 2_000_000) begin
      @(negedge clk);
      cyc++;
    end
    repeat (3) @(negedge clk);

    check(done, "done");
    check(outq == exp_out, "console output is the sorted array");
    check(order_err == 0 && n_ret > 0, "in-order numbering");
    check(exit_ret == 1, "one exit call retired");
    check(st.retired == 32'(n_ret), "retired count");
    check(mc.total_itlb == mc.itlb_if, "I-TLB total");
    check(mc.total_icache == mc.icache_if, "I-cache total");
    check(mc.total_dtlb == mc.dtlb_load + mc.dtlb_store, "D-TLB total");
    check(mc.total_dcache == mc.dcache_pte_if + mc.dcache_data_load + mc.dcache_pte_load
          + mc.dcache_wr_store + mc.dcache_pte_store, "D-cache total");
    check(cycle_count >= st.retired + 32'd4, "cycles >= instructions + 4");
    check(switches == 4, "four mode switches for one system call");
    $display("instructions=%0d cycles=%0d itlb=%0d icache=%0d dtlb=%0d dcache=%0d",
             st.retired, cycle_count, mc.total_itlb, mc.total_icache, mc.total_dtlb, mc.total_dcache);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
