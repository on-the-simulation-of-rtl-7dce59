// miss_counter: the statistics counters of the miss detection unit.
//
// One 32-bit counter per miss category of the published statistics (I-TLB,
// I-cache and page-table-entry D-cache misses in IF; D-TLB, data and PTE
// D-cache misses in MEM for loads and for stores) and the four totals
// (I-TLB, I-cache, D-TLB, D-cache). Each bit of `ev` that is high on a rising
// clock edge adds one to its counter; a total adds the number of its
// categories that fired in that cycle. Counters clear on reset and are read
// at any time through `counts`.
module miss_counter
  import hvsim_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic [N_MISS_EV-1:0] ev,
  output miss_counts_t         counts
);
  logic [1:0] n_dtlb;
  logic [2:0] n_dcache;
  assign n_dtlb   = 2'(ev[EV_DTLB_LD]) + 2'(ev[EV_DTLB_ST]);
  assign n_dcache = 3'(ev[EV_DC_PTE_IF]) + 3'(ev[EV_DC_DATA_LD]) + 3'(ev[EV_DC_PTE_LD])
                  + 3'(ev[EV_DC_WR_ST]) + 3'(ev[EV_DC_PTE_ST]);

  always_ff @(posedge clk) begin
    if (rst) begin
      counts <= '0;
    end else begin
      counts.itlb_if          <= counts.itlb_if          + 32'(ev[EV_ITLB_IF]);
      counts.icache_if        <= counts.icache_if        + 32'(ev[EV_ICACHE_IF]);
      counts.dcache_pte_if    <= counts.dcache_pte_if    + 32'(ev[EV_DC_PTE_IF]);
      counts.dtlb_load        <= counts.dtlb_load        + 32'(ev[EV_DTLB_LD]);
      counts.dcache_data_load <= counts.dcache_data_load + 32'(ev[EV_DC_DATA_LD]);
      counts.dcache_pte_load  <= counts.dcache_pte_load  + 32'(ev[EV_DC_PTE_LD]);
      counts.dtlb_store       <= counts.dtlb_store       + 32'(ev[EV_DTLB_ST]);
      counts.dcache_wr_store  <= counts.dcache_wr_store  + 32'(ev[EV_DC_WR_ST]);
      counts.dcache_pte_store <= counts.dcache_pte_store + 32'(ev[EV_DC_PTE_ST]);
      counts.total_itlb       <= counts.total_itlb       + 32'(ev[EV_ITLB_IF]);
      counts.total_icache     <= counts.total_icache     + 32'(ev[EV_ICACHE_IF]);
      counts.total_dtlb       <= counts.total_dtlb       + 32'(n_dtlb);
      counts.total_dcache     <= counts.total_dcache     + 32'(n_dcache);
    end
  end
endmodule
