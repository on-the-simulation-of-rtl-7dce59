// hazard_unit: hazard detection unit of the timing simulator's control.
//
// Purely combinational. From the stage registers it decides, every simulated
// cycle:
//  * load-use data hazard: the instruction in ID reads a register that the
//    load in EX will write; ID is held one cycle (forwarding covers every
//    other ALU-to-ALU dependence);
//  * branch data hazard: branches (and JALR) are resolved in ID, so an
//    instruction in ID that needs its operands there is held while the
//    producing instruction is in EX, or is a load still in MEM;
//  * control hazard: a taken branch or jump leaving ID flushes the
//    instruction in IF (branches are predicted not taken);
//  * structural hazard: IF (for a page table entry read after an I-TLB miss)
//    and MEM (loads and stores) share the D-cache. A started user keeps it
//    until its last cycle; when both would start in the same cycle MEM, the
//    older instruction, wins;
//  * the "emulate one instruction" request to the functional simulator, a
//    one-cycle pulse when IF is empty, no request is outstanding and the
//    exit system call has not yet been fetched.
// The kinds of hazards, forwarding, branch resolution in ID and predict-not-
// taken follow the paper; the exact hold conditions are this design's.
module hazard_unit
  import hvsim_pkg::*;
(
  input  stage_t if_s,
  input  stage_t id_s,
  input  stage_t ex_s,
  input  stage_t mem_s,
  input  logic   if_tlb_miss,   // IF would need the D-cache when it starts
  input  logic   ex_ready,      // EX done and MEM free or leaving
  input  logic   id_leaving,    // ID advances this cycle
  input  logic   exit_seen,
  input  logic   req_pending,
  output logic   ld_use_stall,
  output logic   branch_stall,
  output logic   id_hold,
  output logic   mem_struct_stall,  // EX may not enter MEM
  output logic   ex_adv,
  output logic   if_struct_stall,   // IF may not start
  output logic   flush_if,
  output logic   emulate
);
  function automatic logic dep(input logic [4:0] src, input logic [4:0] dst);
    return src != 5'd0 && src == dst;
  endfunction

  logic id_in_id, ex_memop, if_dc_busy, mem_dc_busy;

  // Branches and register-indirect jumps need their operands in ID.
  assign id_in_id = id_s.tr.cond_branch || (id_s.tr.taken && id_s.tr.rs1 != 5'd0);

  assign ld_use_stall = id_s.valid && !id_in_id && ex_s.valid && ex_s.tr.load
                      && (dep(id_s.tr.rs1, ex_s.tr.rd) || dep(id_s.tr.rs2, ex_s.tr.rd));
  assign branch_stall = id_s.valid && id_in_id
                      && ((ex_s.valid && (dep(id_s.tr.rs1, ex_s.tr.rd) || dep(id_s.tr.rs2, ex_s.tr.rd)))
                       || (mem_s.valid && mem_s.tr.load
                           && (dep(id_s.tr.rs1, mem_s.tr.rd) || dep(id_s.tr.rs2, mem_s.tr.rd))));
  assign id_hold = ld_use_stall || branch_stall;

  assign ex_memop    = ex_s.tr.load || ex_s.tr.store;
  assign if_dc_busy  = if_s.valid && if_s.started && if_s.used_dc && if_s.rem > 10'd1;
  assign mem_dc_busy = mem_s.valid && mem_s.used_dc && mem_s.rem > 10'd1;

  assign mem_struct_stall = ex_ready && ex_memop && if_dc_busy;
  assign ex_adv           = ex_ready && !mem_struct_stall;
  assign if_struct_stall  = if_s.valid && !if_s.started && if_tlb_miss
                          && (mem_dc_busy || (ex_adv && ex_memop));

  assign flush_if = id_leaving && id_s.tr.taken && if_s.valid;
  assign emulate  = !if_s.valid && !exit_seen && !req_pending;
endmodule
