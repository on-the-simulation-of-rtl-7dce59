// dm_cache: a direct-mapped, physically indexed cache model with one-word
// blocks, as used for the I-cache and the D-cache of the timing simulator.
//
// Only what decides hit or miss is stored: a valid bit and the address tag of
// each block (the data itself lives in the functional simulator's memory).
// The block index is address bits IW+1:2 and the tag is bits 31:IW+2.
// Two lookup ports, A and B, serve one cycle in that order: port B sees a
// refill made by port A in the same cycle (the D-cache uses A for a page table
// entry read and B for the data access of the same load or store). A lookup
// is combinational; when `acc_x` is high on a rising edge and the lookup
// missed, the block is allocated (reads and writes both allocate).
// Direct mapping, one-word blocks and 4096 blocks follow the paper; the
// allocate-on-write-miss policy is this design's choice.
module dm_cache #(
  parameter int unsigned BLOCKS = 4096
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] pa_a,
  input  logic        acc_a,
  output logic        hit_a,
  input  logic [31:0] pa_b,
  input  logic        acc_b,
  output logic        hit_b
);
  localparam int unsigned IW = $clog2(BLOCKS);
  localparam int unsigned TW = 30 - IW;

  logic [BLOCKS-1:0] valid;
  logic [TW-1:0]     tags [BLOCKS];

  logic [IW-1:0] ia, ib;
  logic [TW-1:0] ta, tb;
  logic          fill_a;
  assign ia = pa_a[IW+1:2];
  assign ta = pa_a[31:IW+2];
  assign ib = pa_b[IW+1:2];
  assign tb = pa_b[31:IW+2];

  assign hit_a  = valid[ia] && tags[ia] == ta;
  assign fill_a = acc_a && !hit_a;
  assign hit_b  = (fill_a && ia == ib) ? (ta == tb) : (valid[ib] && tags[ib] == tb);

  always_ff @(posedge clk) begin
    if (rst) begin
      valid <= '0;
    end else begin
      if (fill_a) valid[ia] <= 1'b1;
      if (acc_b && !hit_b) valid[ib] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_a) tags[ia] <= ta;
    if (acc_b && !hit_b) tags[ib] <= tb;
  end
endmodule
