// tb_csr_file: self-checking test of the CSRs and the state of the hardware.
// Walks a virtualized instance through VU -> VS (system call) -> HS
// (hypercall) -> VS -> VU (two SRETs), checking trap targets, cause and epc
// values, hstatus.SPV and the redirection of supervisor CSRs to their VS
// copies; then walks a non-virtualized instance through U -> HS -> M and back.
module tb_csr_file;
  import hvsim_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [11:0] csr_addr [2];
  logic [31:0] csr_rdata [2], csr_wdata [2], pc [2], next_pc [2];
  logic        csr_we [2], ecall [2], sret [2], mret [2], virt [2];
  priv_e       priv [2];

  csr_file #(.VIRTUALIZED(1'b1)) dv (.clk, .rst, .csr_addr(csr_addr[0]), .csr_rdata(csr_rdata[0]),
    .csr_we(csr_we[0]), .csr_wdata(csr_wdata[0]), .ecall(ecall[0]), .sret(sret[0]), .mret(mret[0]),
    .pc(pc[0]), .next_pc(next_pc[0]), .virt(virt[0]), .priv(priv[0]));
  csr_file #(.VIRTUALIZED(1'b0)) dn (.clk, .rst, .csr_addr(csr_addr[1]), .csr_rdata(csr_rdata[1]),
    .csr_we(csr_we[1]), .csr_wdata(csr_wdata[1]), .ecall(ecall[1]), .sret(sret[1]), .mret(mret[1]),
    .pc(pc[1]), .next_pc(next_pc[1]), .virt(virt[1]), .priv(priv[1]));

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask
  task automatic mode(input int i, input logic v, input priv_e p, input string what);
    check({31'd0, virt[i]}, {31'd0, v}, {what, " V"});
    check({30'd0, priv[i]}, {30'd0, p}, {what, " priv"});
  endtask
  // one event in one cycle; returns the combinational next pc seen during it
  task automatic ev(input int i, input int kind, input logic [31:0] at, output logic [31:0] tgt);
    @(negedge clk); pc[i] = at;
    ecall[i] = (kind == 0); sret[i] = (kind == 1); mret[i] = (kind == 2); #1;
    tgt = next_pc[i];
    @(negedge clk); ecall[i] = 0; sret[i] = 0; mret[i] = 0;
  endtask
  task automatic rd(input int i, input logic [11:0] a, input logic [31:0] exp, input string what);
    @(negedge clk); csr_addr[i] = a; #1; check(csr_rdata[i], exp, what);
  endtask
  task automatic wr(input int i, input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); csr_addr[i] = a; csr_wdata[i] = d; csr_we[i] = 1; @(negedge clk); csr_we[i] = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] t;
    for (int i = 0; i < 2; i++) begin
      csr_addr[i] = 0; csr_wdata[i] = 0; pc[i] = 0; csr_we[i] = 0; ecall[i] = 0; sret[i] = 0; mret[i] = 0;
    end
    repeat (2) @(negedge clk); rst = 0;
    // ---- virtualized system
    mode(0, 1, PRIV_U, "reset VU");
    ev(0, 0, 32'h0000_0100, t); check(t, 32'h4000_0000, "VU ecall -> vstvec");
    mode(0, 1, PRIV_S, "in VS");
    rd(0, CSR_SEPC, 32'h0000_0100, "sepc redirected to vsepc");
    rd(0, CSR_SCAUSE, 32'd8, "scause redirected to vscause");
    rd(0, CSR_VSEPC, 32'h0000_0100, "vsepc");
    wr(0, CSR_SSCRATCH, 32'hCAFE_0001);
    rd(0, CSR_VSSCRATCH, 32'hCAFE_0001, "sscratch write lands in vsscratch");
    ev(0, 0, 32'h4000_0040, t); check(t, 32'h8000_0000, "VS ecall -> stvec");
    mode(0, 0, PRIV_S, "in HS");
    rd(0, CSR_SEPC, 32'h4000_0040, "sepc");
    rd(0, CSR_SCAUSE, 32'd10, "scause VS ecall");
    rd(0, CSR_HSTATUS, 32'h80, "hstatus.SPV");
    rd(0, CSR_SSCRATCH, 32'd0, "real sscratch untouched");
    wr(0, CSR_SEPC, 32'h4000_0044);
    ev(0, 1, 32'h8000_0010, t); check(t, 32'h4000_0044, "HS sret -> sepc");
    mode(0, 1, PRIV_S, "back in VS");
    wr(0, CSR_SEPC, 32'h0000_0104);
    ev(0, 1, 32'h4000_0050, t); check(t, 32'h0000_0104, "VS sret -> vsepc");
    mode(0, 1, PRIV_U, "back in VU");
    // ---- non-virtualized system
    mode(1, 0, PRIV_U, "reset U");
    ev(1, 0, 32'h0000_0200, t); check(t, 32'h8000_0000, "U ecall -> stvec");
    mode(1, 0, PRIV_S, "in HS (OS)");
    rd(1, CSR_SCAUSE, 32'd8, "scause U ecall");
    rd(1, CSR_SEPC, 32'h0000_0200, "sepc");
    ev(1, 0, 32'h8000_0020, t); check(t, 32'hC000_0000, "HS ecall -> mtvec");
    mode(1, 0, PRIV_M, "in M");
    rd(1, CSR_MCAUSE, 32'd9, "mcause");
    rd(1, CSR_MSTATUS, 32'h0000_0800, "mstatus.MPP=S");
    wr(1, CSR_MEPC, 32'h8000_0024);
    ev(1, 2, 32'hC000_0008, t); check(t, 32'h8000_0024, "mret -> mepc");
    mode(1, 0, PRIV_S, "back in HS");
    wr(1, CSR_SEPC, 32'h0000_0204);
    ev(1, 1, 32'h8000_0030, t); check(t, 32'h0000_0204, "sret -> sepc");
    mode(1, 0, PRIV_U, "back in U");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
