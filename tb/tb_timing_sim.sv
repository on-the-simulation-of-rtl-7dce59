// tb_timing_sim: self-checking test of the timing simulator pipeline.
// Two instances are fed hand-written trace lists by trace_src. Instance Z has
// every miss penalty set to zero, so each stage takes one cycle and only the
// hazards add cycles: the expected counts (N instructions take N+4 cycles,
// +1 per load-use stall, +1 per branch operand from EX, +2 from a load, +1
// per taken branch) are worked out by hand. Instance D has the paper's
// default penalties (100 cycles) and checks cold misses, a write-through
// store and a structural hazard between an instruction-side page walk and a
// store, again against hand-computed totals. Retired instruction numbers
// must come out in program order.
module tb_timing_sim;
  import hvsim_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  trace_t list_z [16], list_d [16];
  logic emu_z, tv_z, ret_z, done_z, emu_d, tv_d, ret_d, done_d;
  logic [31:0] num_z, num_d, rnum_z, rnum_d, cyc_z, cyc_d;
  trace_t tr_z, tr_d, rtr_z, rtr_d;
  miss_counts_t mc_z, mc_d;
  pipe_stats_t st_z, st_d;

  trace_src src_z (.clk, .rst, .emulate(emu_z), .list(list_z), .trace_valid(tv_z), .inst_num(num_z), .trace(tr_z));
  trace_src src_d (.clk, .rst, .emulate(emu_d), .list(list_d), .trace_valid(tv_d), .inst_num(num_d), .trace(tr_d));

  timing_sim #(.ICACHE_MISS(0), .DC_PTE_MISS(0), .DC_DATA_MISS(0), .DC_WR_MISS(0), .MEM_WRITE(0), .PTE_HIT(0))
    dut_z (.clk, .rst, .emulate(emu_z), .trace_valid(tv_z), .inst_num(num_z), .trace(tr_z),
           .ret_valid(ret_z), .ret_num(rnum_z), .ret_trace(rtr_z), .cycle_count(cyc_z),
           .miss_counts(mc_z), .stats(st_z), .done(done_z));
  timing_sim dut_d (.clk, .rst, .emulate(emu_d), .trace_valid(tv_d), .inst_num(num_d), .trace(tr_d),
           .ret_valid(ret_d), .ret_num(rnum_d), .ret_trace(rtr_d), .cycle_count(cyc_d),
           .miss_counts(mc_d), .stats(st_d), .done(done_d));

  int exp_num_z, exp_num_d;
  always @(posedge clk) if (!rst) begin
    if (ret_z) begin checks++; if (rnum_z != 32'(exp_num_z)) begin failures++; $display("FAIL Z order"); end exp_num_z++; end
    if (ret_d) begin checks++; if (rnum_d != 32'(exp_num_d)) begin failures++; $display("FAIL D order"); end exp_num_d++; end
  end

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask
  function automatic trace_t t(input logic [31:0] pc, input logic [4:0] rs1, rs2, rd,
                               input logic ld, st, br, tk, ex, input logic [31:0] dva = 0);
    trace_t r = '0;
    r.pc = pc; r.rs1 = rs1; r.rs2 = rs2; r.rd = rd; r.load = ld; r.store = st;
    r.cond_branch = br; r.taken = tk; r.exit_call = ex; r.dva = dva;
    return r;
  endfunction
  task automatic restart();
    rst = 1; exp_num_z = 0; exp_num_d = 0; repeat (2) @(negedge clk); rst = 0;
  endtask
  task automatic wait_done(input logic z);
    int n = 0;
    while (!(z ? done_z : done_d) && n < 5000) begin @(negedge clk); n++; end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin list_z[i] = '0; list_d[i] = '0; end
    // ---- Z1: six independent instructions: 6 + 4 cycles
    for (int i = 0; i < 5; i++) list_z[i] = t(32'h100 + 4*i, 1, 2, 5'(3 + i), 0, 0, 0, 0, 0);
    list_z[5] = t(32'h114, 0, 0, 0, 0, 0, 0, 0, 1);
    restart(); wait_done(1);
    check(cyc_z, 10, "Z1 ideal pipeline"); check(st_z.retired, 6, "Z1 retired");
    // ---- Z2: load-use: 3 + 4 + 1
    list_z[0] = t(32'h100, 1, 0, 5, 1, 0, 0, 0, 0, 32'h2000);
    list_z[1] = t(32'h104, 5, 5, 6, 0, 0, 0, 0, 0);
    list_z[2] = t(32'h108, 0, 0, 0, 0, 0, 0, 0, 1);
    restart(); wait_done(1);
    check(cyc_z, 8, "Z2 load-use"); check(st_z.load_use_stalls, 1, "Z2 stall count");
    check(st_z.forwards, 1, "Z2 forwarded load result");
    // ---- Z3: ALU -> taken branch: 4 + 4 + 1 (operand) + 1 (flush)
    list_z[0] = t(32'h100, 0, 0, 5, 0, 0, 0, 0, 0);
    list_z[1] = t(32'h104, 5, 0, 0, 0, 0, 1, 1, 0);
    list_z[2] = t(32'h200, 0, 0, 6, 0, 0, 0, 0, 0);
    list_z[3] = t(32'h204, 0, 0, 0, 0, 0, 0, 0, 1);
    restart(); wait_done(1);
    check(cyc_z, 10, "Z3 branch after ALU, taken"); check(st_z.branch_stalls, 1, "Z3 branch stall");
    check(st_z.flushes, 1, "Z3 flush");
    // ---- Z4: load -> not-taken branch: 3 + 4 + 2
    list_z[0] = t(32'h100, 1, 0, 5, 1, 0, 0, 0, 0, 32'h2000);
    list_z[1] = t(32'h104, 5, 0, 0, 0, 0, 1, 0, 0);
    list_z[2] = t(32'h108, 0, 0, 0, 0, 0, 0, 0, 1);
    restart(); wait_done(1);
    check(cyc_z, 9, "Z4 branch after load"); check(st_z.branch_stalls, 2, "Z4 branch stalls");
    check(st_z.flushes, 0, "Z4 no flush");
    // ---- D1: one instruction, cold: IF 1+100+100, then 4
    list_d[0] = t(32'h1000, 0, 0, 0, 0, 0, 0, 0, 1);
    restart(); wait_done(0);
    check(cyc_d, 205, "D1 cold fetch");
    check(mc_d.itlb_if, 1, "D1 I-TLB miss"); check(mc_d.icache_if, 1, "D1 I-cache miss");
    check(mc_d.dcache_pte_if, 1, "D1 PTE miss");
    // ---- D2: store then exit (same page)
    list_d[0] = t(32'h1000, 1, 2, 0, 0, 1, 0, 0, 0, 32'h2000);
    list_d[1] = t(32'h1004, 0, 0, 0, 0, 0, 0, 0, 1);
    restart(); wait_done(0);
    check(cyc_d, 506, "D2 cold store, write-through");
    check(mc_d.dtlb_store, 1, "D2 D-TLB miss"); check(mc_d.dcache_wr_store, 1, "D2 write miss");
    // ---- D3: store, then a fetch from a new page: structural hazard
    list_d[0] = t(32'h1000, 1, 2, 0, 0, 1, 0, 0, 0, 32'h2000);
    list_d[1] = t(32'h5000, 0, 0, 3, 0, 0, 0, 0, 0);
    list_d[2] = t(32'h5004, 0, 0, 0, 0, 0, 0, 0, 1);
    restart(); wait_done(0);
    check(cyc_d, 706, "D3 structural hazard");
    check(st_d.struct_stalls, 199, "D3 stall cycles");
    check(mc_d.total_dcache, 4, "D3 D-cache misses (two PTEs of IF, PTE and write of the store)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
