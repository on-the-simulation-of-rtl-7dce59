// csr_file: control and status registers plus the state of the hardware
// (virtualization mode V and privilege encoding) of the simulated hart.
//
// It implements the parts of the RISC-V privileged architecture with the
// hypervisor extension that the simulator needs to run an operating system
// and a hypervisor: the supervisor trap CSRs (sstatus.SPP, stvec, sscratch,
// sepc, scause), their virtual-supervisor copies (vsstatus.SPP, vstvec,
// vsscratch, vsepc, vscause), hstatus.SPV, the machine trap CSRs
// (mstatus.MPP/MPV, mtvec, mscratch, mepc, mcause) and medeleg/hedeleg as
// plain storage. While V=1, accesses to supervisor CSRs (0x1xx) are
// redirected to the VS copies (0x2xx), as the hypervisor extension requires,
// so one guest OS binary works unchanged in VS-mode.
//
// Traps are direct (the whole tvec value, low two bits cleared, is the
// target). Environment calls are delegated in a fixed way:
//   ECALL from VU -> VS  (cause 8, vsepc/vscause, V stays 1)
//   ECALL from U  -> HS  (cause 8, sepc/scause)
//   ECALL from VS -> HS  (cause 10, hstatus.SPV=1, V becomes 0)
//   ECALL from HS or M -> M (cause 9 or 11)
// SRET returns from VS (using vsepc) or from HS (using sepc, restoring V from
// hstatus.SPV); MRET returns from M. The delegation rule follows the paper;
// the reset trap-vector values (the start of each level's address portion)
// and the MRET path are this design's own choices.
//
// Timing: csr_rdata and next_pc are combinational; all updates happen on the
// rising clock edge in which csr_we, ecall, sret or mret is high (at most one
// of the last three at a time).
module csr_file
  import hvsim_pkg::*;
#(
  parameter bit          VIRTUALIZED = 1'b1,
  parameter logic [31:0] M_TVEC      = 32'hC000_0000,
  parameter logic [31:0] HS_TVEC     = 32'h8000_0000,
  parameter logic [31:0] VS_TVEC     = 32'h4000_0000
) (
  input  logic        clk,
  input  logic        rst,
  // CSR access
  input  logic [11:0] csr_addr,
  output logic [31:0] csr_rdata,
  input  logic        csr_we,
  input  logic [31:0] csr_wdata,
  // traps and returns
  input  logic        ecall,
  input  logic        sret,
  input  logic        mret,
  input  logic [31:0] pc,        // pc of the ECALL
  output logic [31:0] next_pc,   // target of the trap or return
  // state of the hardware
  output logic        virt,
  output priv_e       priv
);
  logic        sstatus_spp, vsstatus_spp, hstatus_spv, mpv;
  logic [1:0]  mstatus_mpp;
  logic [31:0] stvec, sscratch, sepc, scause;
  logic [31:0] vstvec, vsscratch, vsepc, vscause;
  logic [31:0] mtvec, mscratch, mepc, mcause, medeleg, hedeleg;

  // Supervisor CSRs are redirected to their VS copies while V=1.
  logic [11:0] a;
  assign a = (virt && csr_addr[11:8] == 4'h1) ? {4'h2, csr_addr[7:0]} : csr_addr;

  always_comb begin
    unique case (a)
      CSR_SSTATUS:   csr_rdata = 32'(sstatus_spp) << 8;
      CSR_STVEC:     csr_rdata = stvec;
      CSR_SSCRATCH:  csr_rdata = sscratch;
      CSR_SEPC:      csr_rdata = sepc;
      CSR_SCAUSE:    csr_rdata = scause;
      CSR_VSSTATUS:  csr_rdata = 32'(vsstatus_spp) << 8;
      CSR_VSTVEC:    csr_rdata = vstvec;
      CSR_VSSCRATCH: csr_rdata = vsscratch;
      CSR_VSEPC:     csr_rdata = vsepc;
      CSR_VSCAUSE:   csr_rdata = vscause;
      CSR_HSTATUS:   csr_rdata = 32'(hstatus_spv) << 7;
      CSR_HEDELEG:   csr_rdata = hedeleg;
      CSR_MSTATUS:   csr_rdata = (32'(mstatus_mpp) << 11) | (32'(sstatus_spp) << 8);
      CSR_MEDELEG:   csr_rdata = medeleg;
      CSR_MTVEC:     csr_rdata = mtvec;
      CSR_MSCRATCH:  csr_rdata = mscratch;
      CSR_MEPC:      csr_rdata = mepc;
      CSR_MCAUSE:    csr_rdata = mcause;
      default:       csr_rdata = 32'd0;
    endcase
  end

  // Which level an ECALL traps to.
  typedef enum logic [1:0] {TGT_VS, TGT_HS, TGT_M} tgt_e;
  tgt_e tgt;
  always_comb begin
    if (priv == PRIV_U) tgt = virt ? TGT_VS : TGT_HS;
    else if (priv == PRIV_S && virt) tgt = TGT_HS;
    else tgt = TGT_M;
  end

  always_comb begin
    next_pc = pc + 32'd4;
    if (ecall) begin
      unique case (tgt)
        TGT_VS:  next_pc = {vstvec[31:2], 2'b00};
        TGT_HS:  next_pc = {stvec[31:2], 2'b00};
        default: next_pc = {mtvec[31:2], 2'b00};
      endcase
    end else if (sret) begin
      next_pc = virt ? vsepc : sepc;
    end else if (mret) begin
      next_pc = mepc;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      virt         <= VIRTUALIZED;
      priv         <= PRIV_U;
      sstatus_spp  <= 1'b0;
      vsstatus_spp <= 1'b0;
      hstatus_spv  <= 1'b0;
      mpv          <= 1'b0;
      mstatus_mpp  <= 2'b00;
      stvec        <= HS_TVEC;
      vstvec       <= VS_TVEC;
      mtvec        <= M_TVEC;
      sscratch     <= '0; sepc  <= '0; scause  <= '0;
      vsscratch    <= '0; vsepc <= '0; vscause <= '0;
      mscratch     <= '0; mepc  <= '0; mcause  <= '0;
      medeleg      <= '0; hedeleg <= '0;
    end else if (ecall) begin
      unique case (tgt)
        TGT_VS: begin
          vsepc        <= pc;
          vscause      <= CAUSE_ECALL_U;
          vsstatus_spp <= 1'b0;
          priv         <= PRIV_S;
        end
        TGT_HS: begin
          sepc        <= pc;
          scause      <= virt ? CAUSE_ECALL_VS : CAUSE_ECALL_U;
          sstatus_spp <= (priv == PRIV_S);
          hstatus_spv <= virt;
          virt        <= 1'b0;
          priv        <= PRIV_S;
        end
        default: begin
          mepc        <= pc;
          mcause      <= (priv == PRIV_M) ? CAUSE_ECALL_M : CAUSE_ECALL_HS;
          mstatus_mpp <= priv;
          mpv         <= virt;
          virt        <= 1'b0;
          priv        <= PRIV_M;
        end
      endcase
    end else if (sret) begin
      if (virt) begin
        priv         <= vsstatus_spp ? PRIV_S : PRIV_U;
        vsstatus_spp <= 1'b0;
      end else begin
        priv        <= sstatus_spp ? PRIV_S : PRIV_U;
        virt        <= hstatus_spv;
        sstatus_spp <= 1'b0;
        hstatus_spv <= 1'b0;
      end
    end else if (mret) begin
      priv        <= priv_e'(mstatus_mpp);
      virt        <= (mstatus_mpp != 2'(PRIV_M)) ? mpv : 1'b0;
      mstatus_mpp <= 2'b00;
      mpv         <= 1'b0;
    end else if (csr_we) begin
      unique case (a)
        CSR_SSTATUS:   sstatus_spp  <= csr_wdata[8];
        CSR_STVEC:     stvec        <= csr_wdata;
        CSR_SSCRATCH:  sscratch     <= csr_wdata;
        CSR_SEPC:      sepc         <= csr_wdata;
        CSR_SCAUSE:    scause       <= csr_wdata;
        CSR_VSSTATUS:  vsstatus_spp <= csr_wdata[8];
        CSR_VSTVEC:    vstvec       <= csr_wdata;
        CSR_VSSCRATCH: vsscratch    <= csr_wdata;
        CSR_VSEPC:     vsepc        <= csr_wdata;
        CSR_VSCAUSE:   vscause      <= csr_wdata;
        CSR_HSTATUS:   hstatus_spv  <= csr_wdata[7];
        CSR_HEDELEG:   hedeleg      <= csr_wdata;
        CSR_MSTATUS: begin
          mstatus_mpp <= csr_wdata[12:11];
          sstatus_spp <= csr_wdata[8];
        end
        CSR_MEDELEG:   medeleg      <= csr_wdata;
        CSR_MTVEC:     mtvec        <= csr_wdata;
        CSR_MSCRATCH:  mscratch     <= csr_wdata;
        CSR_MEPC:      mepc         <= csr_wdata;
        CSR_MCAUSE:    mcause       <= csr_wdata;
        default: ;
      endcase
    end
  end

  a_one_event: assert property (@(posedge clk) disable iff (rst) $onehot0({ecall, sret, mret}));
endmodule
