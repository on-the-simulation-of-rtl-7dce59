// timing_sim: the timing simulator, a cycle-by-cycle model of a scalar,
// in-order, five-stage (IF, ID, EX, MEM, WB) pipeline with pipeline locking.
//
// It is fed by the functional simulator: whenever IF is empty it pulses
// `emulate` and waits for one trace record (trace_valid, inst_num, trace),
// which enters IF. While it waits, simulated time stands still: the clock
// cycle counter and all stage counters are frozen, so the reported cycle
// count does not depend on how fast the functional simulator is. In all
// other host clock cycles one host cycle is one simulated cycle.
//
// Each stage register holds one instruction and the number of cycles it
// still needs in that stage. IF and MEM get their cycle counts from the miss
// detection unit (TLB, cache and page-table-entry misses), ID, EX and WB take
// ID_CYCLES, EX_CYCLES and WB_CYCLES. An instruction leaves a stage in its
// last cycle if the next stage is empty or is emptied in the same cycle;
// otherwise it and every instruction behind it wait (pipeline locking). The
// hazard detection unit adds load-use and branch-operand holds in ID, flushes
// the IF instruction behind a taken branch or jump (which is then fetched
// again, since the functional simulator only produces correct-path
// instructions), and arbitrates the D-cache between IF and MEM.
//
// When the exit system call has been fetched no more instructions are
// requested; `done` rises once it has left WB. Every instruction that leaves
// WB is presented on ret_valid/ret_num/ret_trace one cycle later.
module timing_sim
  import hvsim_pkg::*;
#(
  parameter int unsigned ID_CYCLES     = 1,
  parameter int unsigned EX_CYCLES     = 1,
  parameter int unsigned WB_CYCLES     = 1,
  parameter int unsigned ICACHE_BLOCKS = 4096,
  parameter int unsigned DCACHE_BLOCKS = 4096,
  parameter int unsigned ITLB_ENTRIES  = 16,
  parameter int unsigned DTLB_ENTRIES  = 16,
  parameter int unsigned ICACHE_MISS   = 100,
  parameter int unsigned DC_PTE_MISS   = 100,
  parameter int unsigned DC_DATA_MISS  = 100,
  parameter int unsigned DC_WR_MISS    = 100,
  parameter int unsigned MEM_WRITE     = 100,
  parameter int unsigned PTE_HIT       = 1
) (
  input  logic         clk,
  input  logic         rst,
  // from / to the functional simulator
  output logic         emulate,
  input  logic         trace_valid,
  input  logic [31:0]  inst_num,
  input  trace_t       trace,
  // results
  output logic         ret_valid,
  output logic [31:0]  ret_num,
  output trace_t       ret_trace,
  output logic [31:0]  cycle_count,
  output miss_counts_t miss_counts,
  output pipe_stats_t  stats,
  output logic         done
);
  stage_t if_s, id_s, ex_s, mem_s, wb_s;
  logic   exit_seen, req_pending, run;

  assign done = exit_seen && !if_s.valid && !id_s.valid && !ex_s.valid && !mem_s.valid && !wb_s.valid;
  assign run  = (if_s.valid || exit_seen) && !done;

  // ---------------------------------------------------------------- miss detection
  logic                 if_tlb_miss, if_start, mem_start;
  logic [9:0]           if_cycles, mem_cycles;
  logic [N_MISS_EV-1:0] ev_unused;

  miss_detect #(
    .ICACHE_BLOCKS(ICACHE_BLOCKS), .DCACHE_BLOCKS(DCACHE_BLOCKS),
    .ITLB_ENTRIES(ITLB_ENTRIES), .DTLB_ENTRIES(DTLB_ENTRIES),
    .ICACHE_MISS(ICACHE_MISS), .DC_PTE_MISS(DC_PTE_MISS), .DC_DATA_MISS(DC_DATA_MISS),
    .DC_WR_MISS(DC_WR_MISS), .MEM_WRITE(MEM_WRITE), .PTE_HIT(PTE_HIT)
  ) u_miss (
    .clk, .rst,
    .if_va(if_s.tr.pc), .if_tlb_miss, .if_start, .if_cycles,
    .mem_va(ex_s.tr.dva), .mem_load(ex_s.tr.load), .mem_store(ex_s.tr.store),
    .mem_start, .mem_cycles, .ev(ev_unused), .counts(miss_counts)
  );

  // ---------------------------------------------------------------- advance / hazards
  logic wb_adv, mem_adv, ex_ready, ex_adv, id_leaving, if_done, if_adv;
  logic ld_use_stall, branch_stall, id_hold, mem_struct_stall, if_struct_stall, flush_if;

  assign wb_adv   = wb_s.valid && wb_s.rem == 10'd1;
  assign mem_adv  = mem_s.valid && mem_s.rem == 10'd1 && (!wb_s.valid || wb_adv);
  assign ex_ready = ex_s.valid && ex_s.rem == 10'd1 && (!mem_s.valid || mem_adv);
  assign id_leaving = id_s.valid && id_s.rem == 10'd1 && !id_hold && (!ex_s.valid || ex_adv);

  hazard_unit u_hdu (
    .if_s, .id_s, .ex_s, .mem_s, .if_tlb_miss, .ex_ready, .id_leaving,
    .exit_seen, .req_pending,
    .ld_use_stall, .branch_stall, .id_hold, .mem_struct_stall, .ex_adv,
    .if_struct_stall, .flush_if, .emulate
  );

  assign if_start  = run && if_s.valid && !if_s.started && !if_struct_stall;
  assign mem_start = run && ex_adv;
  assign if_done   = if_s.valid && (if_s.started ? (if_s.rem == 10'd1) : (if_start && if_cycles == 10'd1));
  assign if_adv    = if_done && (!id_s.valid || id_leaving) && !flush_if;

  // operands of the instruction entering EX that come from the bypass network
  logic fwd;
  assign fwd = id_leaving
             && ((ex_s.valid && (dep(id_s.tr.rs1, ex_s.tr.rd) || dep(id_s.tr.rs2, ex_s.tr.rd)))
              || (mem_s.valid && (dep(id_s.tr.rs1, mem_s.tr.rd) || dep(id_s.tr.rs2, mem_s.tr.rd))));

  function automatic logic dep(input logic [4:0] src, input logic [4:0] dst);
    return src != 5'd0 && src == dst;
  endfunction

  function automatic stage_t tick(input stage_t s);
    stage_t r = s;
    if (s.valid && s.rem > 10'd1) r.rem = s.rem - 10'd1;
    return r;
  endfunction

  function automatic stage_t enter(input stage_t s, input logic [9:0] cyc);
    stage_t r = s;
    r.valid   = 1'b1;
    r.started = 1'b1;
    r.rem     = cyc;
    return r;
  endfunction

  // ---------------------------------------------------------------- stage registers
  always_ff @(posedge clk) begin
    if (rst) begin
      if_s <= '0; id_s <= '0; ex_s <= '0; mem_s <= '0; wb_s <= '0;
      exit_seen   <= 1'b0;
      req_pending <= 1'b0;
    end else begin
      if (emulate) req_pending <= 1'b1;
      if (trace_valid) begin
        req_pending  <= 1'b0;
        if_s.valid   <= 1'b1;
        if_s.started <= 1'b0;
        if_s.used_dc <= 1'b0;
        if_s.rem     <= 10'd1;
        if_s.num     <= inst_num;
        if_s.tr      <= trace;
        exit_seen    <= trace.exit_call;
      end else if (run) begin
        // WB
        if (mem_adv)     wb_s <= enter(mem_s, 10'(WB_CYCLES));
        else if (wb_adv) wb_s.valid <= 1'b0;
        else             wb_s <= tick(wb_s);
        // MEM
        if (ex_adv) begin
          mem_s         <= enter(ex_s, mem_cycles);
          mem_s.used_dc <= ex_s.tr.load || ex_s.tr.store;
        end else if (mem_adv) mem_s.valid <= 1'b0;
        else                  mem_s <= tick(mem_s);
        // EX
        if (id_leaving)  ex_s <= enter(id_s, 10'(EX_CYCLES));
        else if (ex_adv) ex_s.valid <= 1'b0;
        else             ex_s <= tick(ex_s);
        // ID
        if (if_adv)          id_s <= enter(if_s, 10'(ID_CYCLES));
        else if (id_leaving) id_s.valid <= 1'b0;
        else                 id_s <= tick(id_s);
        // IF
        if (flush_if) begin
          if_s.started <= 1'b0;
          if_s.rem     <= 10'd1;
        end else if (if_adv) begin
          if_s.valid <= 1'b0;
        end else if (if_start) begin
          if_s.started <= 1'b1;
          if_s.used_dc <= if_tlb_miss;
          if_s.rem     <= (if_cycles > 10'd1) ? if_cycles - 10'd1 : 10'd1;
        end else begin
          if_s <= tick(if_s);
        end
      end
    end
  end

  // ---------------------------------------------------------------- counters and outputs
  always_ff @(posedge clk) begin
    if (rst) begin
      cycle_count <= '0;
      stats       <= '0;
      ret_valid   <= 1'b0;
      ret_num     <= '0;
      ret_trace   <= '0;
    end else begin
      ret_valid <= 1'b0;
      if (run) begin
        cycle_count <= cycle_count + 32'd1;
        if (id_s.valid && id_s.rem == 10'd1 && ld_use_stall) stats.load_use_stalls <= stats.load_use_stalls + 32'd1;
        if (id_s.valid && id_s.rem == 10'd1 && branch_stall) stats.branch_stalls <= stats.branch_stalls + 32'd1;
        if (if_struct_stall || mem_struct_stall) stats.struct_stalls <= stats.struct_stalls + 32'd1;
        if (flush_if) stats.flushes  <= stats.flushes + 32'd1;
        if (fwd)      stats.forwards <= stats.forwards + 32'd1;
        if (wb_adv) begin
          stats.retired <= stats.retired + 32'd1;
          ret_valid     <= 1'b1;
          ret_num       <= wb_s.num;
          ret_trace     <= wb_s.tr;
        end
      end
    end
  end

  a_trace_when_empty: assert property (@(posedge clk) disable iff (rst) trace_valid |-> !if_s.valid);
endmodule
