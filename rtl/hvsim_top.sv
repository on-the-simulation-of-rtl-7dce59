// hvsim_top: a functional-first, execution-driven hardware simulator of a
// RISC-V RV32I system with the hypervisor extension.
//
// The functional simulator (func_sim) runs the program binary held in its
// memory image - user program, operating system trap handlers and, when
// VIRTUALIZED=1, hypervisor trap handlers - one instruction per request and
// emits one numbered trace record per dynamic instruction. The timing
// simulator (timing_sim) pulls those records into its pipeline model and
// produces the clock cycle count, the TLB and cache miss counts and the
// retired instruction stream. The only link back is the timing simulator's
// request to emulate the next instruction, so the functional side never runs
// ahead of the pipeline model.
//
// Interface: drive the loader port (ld_we/ld_addr/ld_data, word writes at
// virtual addresses) while rst is high to place the program, give the entry
// point on e_entry, then release rst. Console output of the program appears
// on out_valid/out_byte; `done` rises when the exit system call has left the
// pipeline, after which cycle_count, miss_counts and stats are final.
// VIRTUALIZED selects a virtualized (1) or non-virtualized (0) system, the
// switch the paper provides; the default is the virtualized system.
module hvsim_top
  import hvsim_pkg::*;
#(
  parameter bit          VIRTUALIZED   = 1'b1,
  parameter int unsigned REGION_AW     = 24,
  parameter int unsigned ICACHE_BLOCKS = 4096,
  parameter int unsigned DCACHE_BLOCKS = 4096,
  parameter int unsigned ITLB_ENTRIES  = 16,
  parameter int unsigned DTLB_ENTRIES  = 16,
  parameter int unsigned MISS_PENALTY  = 100,
  parameter int unsigned MEM_WRITE     = 100
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [31:0]  e_entry,
  input  logic         ld_we,
  input  logic [31:0]  ld_addr,
  input  logic [31:0]  ld_data,
  output logic         out_valid,
  output logic [7:0]   out_byte,
  output logic         ret_valid,
  output logic [31:0]  ret_num,
  output trace_t       ret_trace,
  output logic [31:0]  cycle_count,
  output miss_counts_t miss_counts,
  output pipe_stats_t  stats,
  output logic         done
);
  logic        emulate, trace_valid, halted;
  logic [31:0] inst_num;
  trace_t      trace;

  func_sim #(.VIRTUALIZED(VIRTUALIZED), .REGION_AW(REGION_AW)) u_func (
    .clk, .rst, .e_entry, .emulate, .trace_valid, .inst_num, .trace, .halted,
    .out_valid, .out_byte, .ld_we, .ld_addr, .ld_data
  );

  timing_sim #(
    .ICACHE_BLOCKS(ICACHE_BLOCKS), .DCACHE_BLOCKS(DCACHE_BLOCKS),
    .ITLB_ENTRIES(ITLB_ENTRIES), .DTLB_ENTRIES(DTLB_ENTRIES),
    .ICACHE_MISS(MISS_PENALTY), .DC_PTE_MISS(MISS_PENALTY), .DC_DATA_MISS(MISS_PENALTY),
    .DC_WR_MISS(MISS_PENALTY), .MEM_WRITE(MEM_WRITE)
  ) u_timing (
    .clk, .rst, .emulate, .trace_valid, .inst_num, .trace,
    .ret_valid, .ret_num, .ret_trace, .cycle_count, .miss_counts, .stats, .done
  );

  a_halt_only_after_exit: assert property (@(posedge clk) disable iff (rst)
    $rose(halted) |-> trace_valid && trace.exit_call);
endmodule
