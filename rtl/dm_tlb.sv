// dm_tlb: a direct-mapped, virtually indexed, hardware-managed TLB model.
//
// It keeps, per entry, a valid bit, the virtual page number tag and the host
// physical page number. A lookup (vpn in, hit/ppn out) is combinational. When
// `access` is high on a rising clock edge and the lookup missed, the entry is
// refilled with vpn and fill_ppn, the translation the page walker read from
// the shadow page table. Entries are selected by the low bits of the virtual
// page number. The organisation (direct mapped, hardware managed, 16 entries,
// 4 KiB pages) follows the paper; the choice of index bits is this design's.
module dm_tlb #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned VPN_W   = 20
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [VPN_W-1:0] vpn,
  output logic             hit,
  output logic [VPN_W-1:0] ppn,
  input  logic             access,
  input  logic [VPN_W-1:0] fill_ppn
);
  localparam int unsigned IW = $clog2(ENTRIES);
  logic [ENTRIES-1:0] valid;
  logic [VPN_W-1:0]   tag_q [ENTRIES];
  logic [VPN_W-1:0]   ppn_q [ENTRIES];
  logic [IW-1:0]      idx;

  assign idx = vpn[IW-1:0];
  assign hit = valid[idx] && (tag_q[idx] == vpn);
  assign ppn = ppn_q[idx];

  always_ff @(posedge clk) begin
    if (rst) valid <= '0;
    else if (access && !hit) valid[idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (access && !hit) begin
      tag_q[idx] <= vpn;
      ppn_q[idx] <= fill_ppn;
    end
  end
endmodule
