// func_sim: the functional simulator, an execution-driven RV32I emulator.
//
// It holds the state of the program (x registers, program counter, CSRs and
// the virtual memory image) and the state of the hardware (virtualization
// mode and privilege encoding, kept in csr_file). Each request on `emulate`
// makes it emulate exactly one instruction at the current pc, update the
// state, give that dynamic instruction the next number from the instruction
// counter and present the 89-bit trace record with `trace_valid` for one
// cycle. It never runs ahead of the timing simulator.
//
// Supported: all 37 RV32I computational, control-transfer, load and store
// instructions, ECALL, the six Zicsr instructions, and the trap returns
// SRET/MRET. FENCE and EBREAK only advance the pc. ECALL traps to the level
// chosen by csr_file (system calls and hypercalls), except an ECALL from
// U/VU-mode with a7 == EXIT_SYSCALL, which is the program's exit system call:
// it is traced with the exit flag set and the emulator halts. A store to
// STDOUT_ADDR goes to the console port (`out_valid`/`out_byte`) instead of
// memory. Misaligned loads and stores and illegal instructions are not
// checked (illegal encodings behave like FENCE).
//
// Trace fields follow the published record; rs1/rs2/rd are the register
// numbers the instruction actually reads/writes and 0 where it reads or
// writes none, so that the timing simulator can see true dependences. Process
// id and operating system id are 0 (one process, one OS). The taken flag is
// set for taken branches, jumps, and also for ECALL/SRET/MRET, which redirect
// the pc (this design's choice).
//
// Timing per instruction (host clock): request -> fetch read (1) -> decode
// (1) -> execute (1), plus one cycle for loads; trace_valid is high in the
// cycle after execute (4 or 5 cycles after the request). The start pc comes
// from e_entry at reset, bypassing the boot code.
module func_sim
  import hvsim_pkg::*;
#(
  parameter bit          VIRTUALIZED  = 1'b1,
  parameter int unsigned REGION_AW    = 24,
  parameter logic [31:0] STDOUT_ADDR  = 32'hBFFF_F000,
  parameter logic [31:0] EXIT_SYSCALL = 32'd93,
  parameter logic [31:0] SP_RESET     = 32'h3FFF_FFF0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] e_entry,
  // from the timing simulator's hazard detection unit
  input  logic        emulate,
  // to the timing simulator
  output logic        trace_valid,
  output logic [31:0] inst_num,
  output trace_t      trace,
  output logic        halted,
  // console
  output logic        out_valid,
  output logic [7:0]  out_byte,
  // program loader
  input  logic        ld_we,
  input  logic [31:0] ld_addr,
  input  logic [31:0] ld_data
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_EXEC, S_LOAD, S_HALT} state_e;
  state_e state;

  localparam logic [6:0] OP_LUI = 7'b0110111, OP_AUIPC = 7'b0010111, OP_JAL = 7'b1101111,
                         OP_JALR = 7'b1100111, OP_BR = 7'b1100011, OP_LOAD = 7'b0000011,
                         OP_STORE = 7'b0100011, OP_IMM = 7'b0010011, OP_OP = 7'b0110011,
                         OP_SYS = 7'b1110011;

  logic [31:0] pc, ir, icount;
  logic [31:0] mem_addr, mem_rdata, mem_wdata;
  logic [3:0]  mem_wbe;
  logic        mem_re;

  // ---------------------------------------------------------------- state of the program
  logic [4:0]  rs1, rs2, rd;
  logic [31:0] x1v, x2v, a7v;
  logic        rf_we;
  logic [31:0] rf_wd;
  logic [4:0]  rf_wa;

  regfile #(.SP_RESET(SP_RESET)) u_x (
    .clk, .rst,
    .ra1(rs1), .rd1(x1v), .ra2((state == S_EXEC) ? rs2 : 5'd17), .rd2(x2v),
    .we(rf_we), .wa(rf_wa), .wd(rf_wd)
  );
  assign a7v = x2v;  // a7 (x17) is read on port 2 outside S_EXEC; see ecall check below

  vmem #(.REGION_AW(REGION_AW)) u_mem (
    .clk, .addr(mem_addr), .re(mem_re), .rdata(mem_rdata), .wbe(mem_wbe), .wdata(mem_wdata),
    .ld_we, .ld_addr, .ld_data
  );

  logic        csr_we, ecall, sret, mret, virt;
  logic [31:0] csr_rdata, csr_wdata, trap_pc;
  priv_e       priv;

  csr_file #(.VIRTUALIZED(VIRTUALIZED)) u_csr (
    .clk, .rst, .csr_addr(ir[31:20]), .csr_rdata, .csr_we, .csr_wdata,
    .ecall, .sret, .mret, .pc, .next_pc(trap_pc), .virt, .priv
  );

  // ---------------------------------------------------------------- decode
  logic [6:0]  opc;
  logic [2:0]  f3;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  assign opc   = ir[6:0];
  assign f3    = ir[14:12];
  assign imm_i = {{20{ir[31]}}, ir[31:20]};
  assign imm_s = {{20{ir[31]}}, ir[31:25], ir[11:7]};
  assign imm_b = {{19{ir[31]}}, ir[31], ir[7], ir[30:25], ir[11:8], 1'b0};
  assign imm_u = {ir[31:12], 12'd0};
  assign imm_j = {{11{ir[31]}}, ir[31], ir[19:12], ir[20], ir[30:21], 1'b0};

  logic uses_rs1, uses_rs2, writes_rd;
  logic is_csr, is_ecall, is_sret, is_mret, is_exit;
  always_comb begin
    is_csr   = (opc == OP_SYS) && (f3 != 3'd0);
    is_ecall = (opc == OP_SYS) && (f3 == 3'd0) && (ir[31:20] == 12'h000);
    is_sret  = (opc == OP_SYS) && (f3 == 3'd0) && (ir[31:20] == 12'h102);
    is_mret  = (opc == OP_SYS) && (f3 == 3'd0) && (ir[31:20] == 12'h302);
    uses_rs1 = opc inside {OP_JALR, OP_BR, OP_LOAD, OP_STORE, OP_IMM, OP_OP}
             || (is_csr && !f3[2]);
    uses_rs2 = opc inside {OP_BR, OP_STORE, OP_OP};
    writes_rd = (opc inside {OP_LUI, OP_AUIPC, OP_JAL, OP_JALR, OP_LOAD, OP_IMM, OP_OP} || is_csr)
              && ir[11:7] != 5'd0;
    rs1 = uses_rs1 ? ir[19:15] : 5'd0;
    rs2 = uses_rs2 ? ir[24:20] : 5'd0;
    rd  = writes_rd ? ir[11:7] : 5'd0;
  end

  // a7 is sampled while the instruction is being decoded (port 2 is free then)
  logic [31:0] a7_q;
  assign is_exit = is_ecall && (priv == PRIV_U) && (a7_q == EXIT_SYSCALL);

  // ---------------------------------------------------------------- execute
  logic [31:0] alu_b, alu, dva, npc, csr_src;
  logic        br_taken;
  always_comb begin
    alu_b = (opc == OP_OP) ? x2v : imm_i;
    unique case (f3)
      3'd0: alu = (opc == OP_OP && ir[30]) ? x1v - alu_b : x1v + alu_b;
      3'd1: alu = x1v << alu_b[4:0];
      3'd2: alu = {31'd0, $signed(x1v) < $signed(alu_b)};
      3'd3: alu = {31'd0, x1v < alu_b};
      3'd4: alu = x1v ^ alu_b;
      3'd5: alu = ir[30] ? 32'($signed(x1v) >>> alu_b[4:0]) : x1v >> alu_b[4:0];
      3'd6: alu = x1v | alu_b;
      default: alu = x1v & alu_b;
    endcase
    unique case (f3)
      3'd0: br_taken = (x1v == x2v);
      3'd1: br_taken = (x1v != x2v);
      3'd4: br_taken = ($signed(x1v) < $signed(x2v));
      3'd5: br_taken = ($signed(x1v) >= $signed(x2v));
      3'd6: br_taken = (x1v < x2v);
      3'd7: br_taken = (x1v >= x2v);
      default: br_taken = 1'b0;
    endcase
    dva = x1v + ((opc == OP_STORE) ? imm_s : imm_i);
    csr_src = f3[2] ? {27'd0, ir[19:15]} : x1v;
    unique case (f3[1:0])
      2'd1:    csr_wdata = csr_src;
      2'd2:    csr_wdata = csr_rdata | csr_src;
      default: csr_wdata = csr_rdata & ~csr_src;
    endcase
    // next pc
    if (opc == OP_JAL) npc = pc + imm_j;
    else if (opc == OP_JALR) npc = (x1v + imm_i) & ~32'd1;
    else if (opc == OP_BR && br_taken) npc = pc + imm_b;
    else if (is_ecall || is_sret || is_mret) npc = trap_pc;
    else npc = pc + 32'd4;
  end

  // store data and byte enables
  logic [31:0] st_data;
  logic [3:0]  st_be;
  always_comb begin
    unique case (f3[1:0])
      2'd0:    begin st_data = {4{x2v[7:0]}};  st_be = 4'b0001 << dva[1:0]; end
      2'd1:    begin st_data = {2{x2v[15:0]}}; st_be = dva[1] ? 4'b1100 : 4'b0011; end
      default: begin st_data = x2v;            st_be = 4'b1111; end
    endcase
  end

  // load data extraction
  logic [31:0] ld_shift, ld_val;
  logic [1:0]  ld_off;
  logic [2:0]  ld_f3;
  logic [4:0]  ld_rd;
  assign ld_shift = mem_rdata >> {ld_off, 3'b000};
  always_comb begin
    unique case (ld_f3)
      3'd0:    ld_val = {{24{ld_shift[7]}}, ld_shift[7:0]};
      3'd1:    ld_val = {{16{ld_shift[15]}}, ld_shift[15:0]};
      3'd4:    ld_val = {24'd0, ld_shift[7:0]};
      3'd5:    ld_val = {16'd0, ld_shift[15:0]};
      default: ld_val = mem_rdata;
    endcase
  end

  // ---------------------------------------------------------------- control
  logic exec, is_stdout;
  assign exec      = (state == S_EXEC) && !is_exit;
  assign is_stdout = (opc == OP_STORE) && (dva == STDOUT_ADDR);

  always_comb begin
    mem_re    = 1'b0;
    mem_addr  = pc;
    mem_wbe   = 4'd0;
    mem_wdata = st_data;
    if (state == S_IDLE && emulate) mem_re = 1'b1;
    if (exec && opc == OP_LOAD) begin mem_re = 1'b1; mem_addr = dva; end
    if (exec && opc == OP_STORE && !is_stdout) begin mem_wbe = st_be; mem_addr = dva; end
  end

  assign csr_we = exec && is_csr;
  assign ecall  = exec && is_ecall;
  assign sret   = exec && is_sret;
  assign mret   = exec && is_mret;

  always_comb begin
    rf_we = 1'b0;
    rf_wa = rd;
    rf_wd = alu;
    if (state == S_LOAD) begin
      rf_we = 1'b1; rf_wa = ld_rd; rf_wd = ld_val;
    end else if (exec && opc != OP_LOAD) begin
      rf_we = writes_rd;
      unique case (opc)
        OP_LUI:           rf_wd = imm_u;
        OP_AUIPC:         rf_wd = pc + imm_u;
        OP_JAL, OP_JALR:  rf_wd = pc + 32'd4;
        OP_SYS:           rf_wd = csr_rdata;
        default:          rf_wd = alu;
      endcase
    end
  end

  trace_t tr_next;
  always_comb begin
    tr_next = '0;
    tr_next.pc          = pc;
    tr_next.load        = (opc == OP_LOAD);
    tr_next.store       = (opc == OP_STORE);
    tr_next.dva         = (opc inside {OP_LOAD, OP_STORE}) ? dva : 32'd0;
    tr_next.rs1         = rs1;
    tr_next.rs2         = rs2;
    tr_next.rd          = rd;
    tr_next.cond_branch = (opc == OP_BR);
    tr_next.taken       = (opc == OP_JAL) || (opc == OP_JALR) || (opc == OP_BR && br_taken)
                        || ((is_ecall && !is_exit) || is_sret || is_mret);
    tr_next.virt        = virt;
    tr_next.priv        = priv;
    tr_next.exit_call   = is_exit;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      pc          <= e_entry;
      icount      <= '0;
      trace_valid <= 1'b0;
      trace       <= '0;
      inst_num    <= '0;
      out_valid   <= 1'b0;
      out_byte    <= '0;
      ir          <= '0;
      a7_q        <= '0;
      ld_off      <= '0;
      ld_f3       <= '0;
      ld_rd       <= '0;
    end else begin
      trace_valid <= 1'b0;
      out_valid   <= 1'b0;
      unique case (state)
        S_IDLE:  if (emulate) state <= S_FETCH;
        S_FETCH: begin
          ir    <= mem_rdata;
          a7_q  <= a7v;
          state <= S_EXEC;
        end
        S_EXEC: begin
          trace    <= tr_next;
          inst_num <= icount;
          icount   <= icount + 32'd1;
          pc       <= npc;
          if (is_exit) begin
            trace_valid <= 1'b1;
            state       <= S_HALT;
          end else if (opc == OP_LOAD) begin
            ld_off <= dva[1:0];
            ld_f3  <= f3;
            ld_rd  <= rd;
            state  <= S_LOAD;
          end else begin
            trace_valid <= 1'b1;
            state       <= S_IDLE;
          end
          if (exec && is_stdout) begin
            out_valid <= 1'b1;
            out_byte  <= x2v[7:0];
          end
        end
        S_LOAD: begin
          trace_valid <= 1'b1;
          state       <= S_IDLE;
        end
        default: ;  // S_HALT
      endcase
    end
  end

  assign halted = (state == S_HALT);
endmodule
