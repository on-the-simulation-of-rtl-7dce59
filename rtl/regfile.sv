// regfile: the architected x registers of the simulated RV32I hart.
//
// 32 registers of 32 bits; x0 always reads as zero and ignores writes. Two
// combinational read ports and one synchronous write port (written on the
// rising clock edge when we=1). On reset every register is cleared except
// the stack pointer x2, which is loaded with SP_RESET: the simulator starts at
// the program entry point, as if the operating system had already prepared
// the user stack. The register count and width are RV32I's; the reset value
// of x2 is this design's own choice.
module regfile #(
  parameter logic [31:0] SP_RESET = 32'h3FFF_FFF0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [4:0]  ra1,
  output logic [31:0] rd1,
  input  logic [4:0]  ra2,
  output logic [31:0] rd2,
  input  logic        we,
  input  logic [4:0]  wa,
  input  logic [31:0] wd
);
  logic [31:0] x [32];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 32; i++) x[i] <= (i == 2) ? SP_RESET : 32'd0;
    end else if (we && wa != 5'd0) begin
      x[wa] <= wd;
    end
  end

  assign rd1 = (ra1 == 5'd0) ? 32'd0 : x[ra1];
  assign rd2 = (ra2 == 5'd0) ? 32'd0 : x[ra2];
endmodule
