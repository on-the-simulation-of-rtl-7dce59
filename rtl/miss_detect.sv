// miss_detect: the miss detection unit of the timing simulator.
//
// It holds the I-TLB, I-cache, D-TLB and D-cache models and the miss counter,
// and turns each memory access of the simulated pipeline into a number of
// stage cycles:
//
//   IF  cycles = 1 + PTE read (if I-TLB miss) + ICACHE_MISS (if I-cache miss)
//   MEM cycles = 1                                     (no memory access)
//              = 1 + PTE read + DC_DATA_MISS (if miss)  (load)
//              = 1 + PTE read + DC_WR_MISS (if miss) + MEM_WRITE  (store)
//   PTE read   = DC_PTE_MISS if the page table entry misses in the D-cache,
//                PTE_HIT otherwise.
//
// A TLB miss is served by a hardware page walker that reads one entry of the
// shadow page table (at PT_BASE + 4*VPN, a host physical address) through
// the D-cache; the entry gives the host physical page. Both caches are looked
// up with the host physical address (physically indexed). Stores always pay
// MEM_WRITE because the D-cache is write-through.
//
// The unit is a timing model: lookups and refills happen in the single clock
// cycle in which a stage starts (if_start / mem_start high), and the cycle
// count for that stage is returned combinationally in that same cycle. The
// caller guarantees that IF and MEM never use the D-cache in the same cycle
// (that is the structural hazard). The 100-cycle penalties, the write-through
// D-cache, the split caches and TLBs and the shadow page table follow the
// paper; PTE_HIT, PT_BASE and the way the parts add up are this design's.
module miss_detect
  import hvsim_pkg::*;
#(
  parameter int unsigned ICACHE_BLOCKS = 4096,
  parameter int unsigned DCACHE_BLOCKS = 4096,
  parameter int unsigned ITLB_ENTRIES  = 16,
  parameter int unsigned DTLB_ENTRIES  = 16,
  parameter int unsigned ICACHE_MISS   = 100,
  parameter int unsigned DC_PTE_MISS   = 100,
  parameter int unsigned DC_DATA_MISS  = 100,
  parameter int unsigned DC_WR_MISS    = 100,
  parameter int unsigned MEM_WRITE     = 100,
  parameter int unsigned PTE_HIT       = 1,
  parameter logic [31:0] PT_BASE       = 32'h0100_0000
) (
  input  logic         clk,
  input  logic         rst,
  // IF stage
  input  logic [31:0]  if_va,
  output logic         if_tlb_miss,   // lookup result, valid at any time
  input  logic         if_start,
  output logic [9:0]   if_cycles,
  // MEM stage
  input  logic [31:0]  mem_va,
  input  logic         mem_load,
  input  logic         mem_store,
  input  logic         mem_start,
  output logic [9:0]   mem_cycles,
  // statistics
  output logic [N_MISS_EV-1:0] ev,
  output miss_counts_t counts
);
  logic        itlb_hit, dtlb_hit;
  logic [19:0] itlb_ppn, dtlb_ppn;
  logic [31:0] if_pa, mem_pa, if_pte_pa, mem_pte_pa;
  logic        ic_hit, dc_hit_a, dc_hit_b;
  logic        if_pte, mem_pte, mem_op;

  assign mem_op      = mem_load || mem_store;
  assign if_tlb_miss = !itlb_hit;
  assign if_pte      = if_start && !itlb_hit;
  assign mem_pte     = mem_start && mem_op && !dtlb_hit;

  assign if_pte_pa  = PT_BASE + {10'd0, if_va[31:12], 2'b00};
  assign mem_pte_pa = PT_BASE + {10'd0, mem_va[31:12], 2'b00};
  assign if_pa      = {itlb_hit ? itlb_ppn : shadow_ppn(if_va[31:12]), if_va[11:0]};
  assign mem_pa     = {dtlb_hit ? dtlb_ppn : shadow_ppn(mem_va[31:12]), mem_va[11:0]};

  dm_tlb #(.ENTRIES(ITLB_ENTRIES)) u_itlb (
    .clk, .rst, .vpn(if_va[31:12]), .hit(itlb_hit), .ppn(itlb_ppn),
    .access(if_start), .fill_ppn(shadow_ppn(if_va[31:12]))
  );

  dm_tlb #(.ENTRIES(DTLB_ENTRIES)) u_dtlb (
    .clk, .rst, .vpn(mem_va[31:12]), .hit(dtlb_hit), .ppn(dtlb_ppn),
    .access(mem_start && mem_op), .fill_ppn(shadow_ppn(mem_va[31:12]))
  );

  logic ic_hit_b_unused;
  dm_cache #(.BLOCKS(ICACHE_BLOCKS)) u_icache (
    .clk, .rst, .pa_a(if_pa), .acc_a(if_start), .hit_a(ic_hit),
    .pa_b(32'd0), .acc_b(1'b0), .hit_b(ic_hit_b_unused)
  );

  // D-cache port A: page table entry reads (IF or MEM); port B: MEM data.
  dm_cache #(.BLOCKS(DCACHE_BLOCKS)) u_dcache (
    .clk, .rst,
    .pa_a(if_pte ? if_pte_pa : mem_pte_pa), .acc_a(if_pte || mem_pte), .hit_a(dc_hit_a),
    .pa_b(mem_pa), .acc_b(mem_start && mem_op), .hit_b(dc_hit_b)
  );

  always_comb begin
    if_cycles = 10'd1;
    if (!itlb_hit) if_cycles += 10'(dc_hit_a ? PTE_HIT : DC_PTE_MISS);
    if (!ic_hit)   if_cycles += 10'(ICACHE_MISS);

    mem_cycles = 10'd1;
    if (mem_op && !dtlb_hit) mem_cycles += 10'(dc_hit_a ? PTE_HIT : DC_PTE_MISS);
    if (mem_load && !dc_hit_b) mem_cycles += 10'(DC_DATA_MISS);
    if (mem_store) begin
      if (!dc_hit_b) mem_cycles += 10'(DC_WR_MISS);
      mem_cycles += 10'(MEM_WRITE);
    end
  end

  always_comb begin
    ev = '0;
    ev[EV_ITLB_IF]    = if_start && !itlb_hit;
    ev[EV_ICACHE_IF]  = if_start && !ic_hit;
    ev[EV_DC_PTE_IF]  = if_pte && !dc_hit_a;
    ev[EV_DTLB_LD]    = mem_start && mem_load && !dtlb_hit;
    ev[EV_DC_PTE_LD]  = mem_start && mem_load && !dtlb_hit && !dc_hit_a;
    ev[EV_DC_DATA_LD] = mem_start && mem_load && !dc_hit_b;
    ev[EV_DTLB_ST]    = mem_start && mem_store && !dtlb_hit;
    ev[EV_DC_PTE_ST]  = mem_start && mem_store && !dtlb_hit && !dc_hit_a;
    ev[EV_DC_WR_ST]   = mem_start && mem_store && !dc_hit_b;
  end

  miss_counter u_cnt (.clk, .rst, .ev, .counts);

  a_one_dcache_user: assert property (@(posedge clk) disable iff (rst) !(if_pte && mem_pte));
endmodule
