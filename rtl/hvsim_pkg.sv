// hvsim_pkg: types and constants shared by the functional simulator and the
// timing simulator.
//
// The instruction trace record follows the 89-bit layout of the published
// trace format bit for bit (process id in bit 0 up to the exit-system-call
// flag in bit 88). Privilege encodings are the RISC-V ones (U=0, S=1, M=3);
// together with the virtualization bit V they name the five modes used here:
// U, HS, M (V=0) and VU, VS (V=1).
//
// Address translation: the shadow page table maps each virtual address to a
// host physical address by a fixed rule that reproduces the published address
// ranges: the M, HS, VS and U/VU virtual ranges (top two address bits 11, 10,
// 01, 00) land in host physical ranges 00, 01, 10, 11. The page offset (12
// bits) and the remaining page-number bits pass through unchanged. Where the
// shadow page table itself lives (PT_BASE) is this design's own choice.
package hvsim_pkg;

  // ---------------------------------------------------------------- trace
  typedef struct packed {
    logic        exit_call;    // 88     exit system call
    logic [1:0]  priv;         // 87:86  privilege encoding
    logic        virt;         // 85     virtualization mode
    logic        taken;        // 84     taken branch or unconditional jump
    logic        cond_branch;  // 83     conditional branch
    logic [4:0]  rd;           // 82:78
    logic [4:0]  rs2;          // 77:73
    logic [4:0]  rs1;          // 72:68
    logic [31:0] dva;          // 67:36  data virtual address
    logic        store;        // 35
    logic        load;         // 34
    logic [31:0] pc;           // 33:2   program counter
    logic        os_id;        // 1      operating system id
    logic        pid;          // 0      process id
  } trace_t;

  localparam int unsigned TRACE_W = $bits(trace_t);  // 89

  // ---------------------------------------------------------------- modes
  typedef enum logic [1:0] {
    PRIV_U = 2'b00,
    PRIV_S = 2'b01,
    PRIV_M = 2'b11
  } priv_e;

  // ---------------------------------------------------------------- miss statistics
  // One counter per row of the published performance-statistics tables.
  typedef struct packed {
    logic [31:0] itlb_if;          // I-TLB misses while reading PTE in IF
    logic [31:0] icache_if;        // I-cache misses while reading instruction in IF
    logic [31:0] dcache_pte_if;    // D-cache misses while reading PTE in IF
    logic [31:0] dtlb_load;        // D-TLB misses in MEM during load
    logic [31:0] dcache_data_load; // D-cache misses reading data in MEM during load
    logic [31:0] dcache_pte_load;  // D-cache misses reading PTE in MEM during load
    logic [31:0] dtlb_store;       // D-TLB misses in MEM during store
    logic [31:0] dcache_wr_store;  // D-cache misses writing data in MEM during store
    logic [31:0] dcache_pte_store; // D-cache misses reading PTE in MEM during store
    logic [31:0] total_itlb;
    logic [31:0] total_icache;
    logic [31:0] total_dtlb;
    logic [31:0] total_dcache;
  } miss_counts_t;

  // Event index into the 9-bit miss event vector.
  typedef enum int unsigned {
    EV_ITLB_IF = 0,
    EV_ICACHE_IF,
    EV_DC_PTE_IF,
    EV_DTLB_LD,
    EV_DC_DATA_LD,
    EV_DC_PTE_LD,
    EV_DTLB_ST,
    EV_DC_WR_ST,
    EV_DC_PTE_ST
  } miss_ev_e;

  localparam int unsigned N_MISS_EV = 9;

  // ---------------------------------------------------------------- CSR addresses
  localparam logic [11:0] CSR_SSTATUS   = 12'h100;
  localparam logic [11:0] CSR_STVEC     = 12'h105;
  localparam logic [11:0] CSR_SSCRATCH  = 12'h140;
  localparam logic [11:0] CSR_SEPC      = 12'h141;
  localparam logic [11:0] CSR_SCAUSE    = 12'h142;
  localparam logic [11:0] CSR_VSSTATUS  = 12'h200;
  localparam logic [11:0] CSR_VSTVEC    = 12'h205;
  localparam logic [11:0] CSR_VSSCRATCH = 12'h240;
  localparam logic [11:0] CSR_VSEPC     = 12'h241;
  localparam logic [11:0] CSR_VSCAUSE   = 12'h242;
  localparam logic [11:0] CSR_MSTATUS   = 12'h300;
  localparam logic [11:0] CSR_MEDELEG   = 12'h302;
  localparam logic [11:0] CSR_MTVEC     = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH  = 12'h340;
  localparam logic [11:0] CSR_MEPC      = 12'h341;
  localparam logic [11:0] CSR_MCAUSE    = 12'h342;
  localparam logic [11:0] CSR_HSTATUS   = 12'h600;
  localparam logic [11:0] CSR_HEDELEG   = 12'h602;

  // Exception cause codes (RISC-V privileged specification).
  localparam logic [31:0] CAUSE_ECALL_U  = 32'd8;   // from U or VU
  localparam logic [31:0] CAUSE_ECALL_HS = 32'd9;
  localparam logic [31:0] CAUSE_ECALL_VS = 32'd10;
  localparam logic [31:0] CAUSE_ECALL_M  = 32'd11;


  // ---------------------------------------------------------------- pipeline statistics
  // How often each pipeline mechanism of the timing simulator occurred.
  typedef struct packed {
    logic [31:0] load_use_stalls;    // cycles ID held by a load-use hazard
    logic [31:0] branch_stalls;      // cycles ID held for a branch operand
    logic [31:0] struct_stalls;      // cycles IF or EX->MEM held for the D-cache port
    logic [31:0] flushes;            // IF instructions flushed by a taken branch/jump
    logic [31:0] forwards;           // operands delivered by forwarding
    logic [31:0] retired;            // instructions that finished WB
  } pipe_stats_t;

  // Pipeline stage register of the timing simulator.
  typedef struct packed {
    logic        valid;
    logic        started;   // IF only: miss lookups done, rem is counting
    logic        used_dc;   // IF: read a PTE through the D-cache; MEM: load or store
    logic [9:0]  rem;       // cycles left in this stage, current one included
    logic [31:0] num;       // instruction number
    trace_t      tr;
  } stage_t;

  // ---------------------------------------------------------------- translation
  // Shadow page table mapping: virtual page number -> host physical page number.
  function automatic logic [19:0] shadow_ppn(input logic [19:0] vpn);
    return {~vpn[19:18], vpn[17:0]};
  endfunction

  function automatic logic [31:0] va_to_hpa(input logic [31:0] va);
    return {shadow_ppn(va[31:12]), va[11:0]};
  endfunction

endpackage
