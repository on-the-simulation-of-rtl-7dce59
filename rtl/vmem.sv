// vmem: the virtual memory image of the simulated system.
//
// The 4 GiB RV32I virtual address space is split into four portions, one per
// privilege level (M: 0xC000_0000.., HS: 0x8000_0000.., VS: 0x4000_0000..,
// U/VU: 0x0000_0000..), each holding that level's code, data and stack. Each
// portion keeps 2**REGION_AW words; an address selects its portion with
// bits 31:30 and its word with bits REGION_AW+1:2, so within a portion the
// image repeats every 2**REGION_AW words (code at the bottom of a portion
// and a stack near its top share the same storage without overlapping as
// long as they fit). A full image would need REGION_AW = 28; the default of
// 24 (64 MiB per portion, 256 MiB in all) is the largest the synthesis front
// end elaborates in a reasonable memory budget: it needs about 4x the memory
// per two address bits (0.46 GB at 20, 1.7 GB at 22), so 26 would need about
// 28 GB and 28 over 100 GB. Storage is one 32-bit word per entry, written
// with byte lanes.
//
// Port A is the emulator's port: one synchronous read (data valid the cycle
// after the address) and a byte-enabled synchronous write. Port L is the
// loader's word write port used to place the program binary before the
// simulation starts; it wins over port A in the same cycle.
module vmem #(
  parameter int unsigned REGION_AW = 24
) (
  input  logic        clk,
  input  logic [31:0] addr,     // byte address (word aligned part used)
  input  logic        re,
  output logic [31:0] rdata,
  input  logic [3:0]  wbe,      // byte write enables
  input  logic [31:0] wdata,
  input  logic        ld_we,    // loader
  input  logic [31:0] ld_addr,
  input  logic [31:0] ld_data
);
  localparam int unsigned AW = REGION_AW + 2;
  logic [31:0] mem [2**AW];

  function automatic logic [AW-1:0] idx(input logic [31:0] a);
    return {a[31:30], a[REGION_AW+1:2]};
  endfunction

  always_ff @(posedge clk) begin
    if (ld_we) begin
      mem[idx(ld_addr)] <= ld_data;
    end else begin
      for (int b = 0; b < 4; b++)
        if (wbe[b]) mem[idx(addr)][8*b +: 8] <= wdata[8*b +: 8];
    end
    if (re) rdata <= mem[idx(addr)];
  end
endmodule
