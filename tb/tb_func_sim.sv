// tb_func_sim: self-checking test of the functional simulator.
// A virtualized instance runs a short user program (ALU, loads and stores of
// all widths, branches, JAL), a write system call that traps from VU-mode to
// a guest OS handler in VS-mode, which makes a hypercall to a hypervisor
// handler in HS-mode that prints one character on the console, and the exit
// system call. Expected register values, the instruction count and selected
// trace records (mode bits, flags, register fields, data address) are worked
// out by hand from the program.
module tb_func_sim;
  import hvsim_pkg::*;
  import rv_asm_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic emulate, trace_valid, halted, out_valid, ld_we;
  logic [31:0] inst_num, ld_addr, ld_data;
  logic [7:0] out_byte;
  trace_t trace;
  trace_t seen [64];
  int n_seen = 0, n_out = 0;
  logic [7:0] last_out;

  func_sim #(.VIRTUALIZED(1'b1), .REGION_AW(12)) dut (.clk, .rst, .e_entry(32'h0), .emulate,
    .trace_valid, .inst_num, .trace, .halted, .out_valid, .out_byte, .ld_we, .ld_addr, .ld_data);

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask
  task automatic put(input logic [31:0] a, d);
    @(negedge clk); ld_we = 1; ld_addr = a; ld_data = d;
  endtask

  always @(posedge clk) begin
    if (trace_valid && !rst) begin
      if (n_seen < 64) seen[n_seen] <= trace;
      checks++; if (inst_num != 32'(n_seen)) begin failures++; $display("FAIL numbering"); end
      n_seen <= n_seen + 1;
    end
    if (out_valid && !rst) begin n_out <= n_out + 1; last_out <= out_byte; end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] u [21], vs [5], hs [7];
    emulate = 0; ld_we = 0; ld_addr = 0; ld_data = 0;
    u = '{addi(A0, ZERO, 5), addi(A1, ZERO, -3), add(A2, A0, A1), sub(A3, A0, A1), slli(A4, A0, 3),
          lui(T0, 20'h1), sw(A3, T0, 0), lw(T1, T0, 0), sb(A0, T0, 5), lbu(T2, T0, 5), lw(S0, T0, 4),
          beq(A0, A1, 8), bne(A0, A1, 8), addi(S1, ZERO, 99), jal(RA, 8), addi(S1, ZERO, 77),
          addi(A7, ZERO, 64), ecall(), addi(S1, ZERO, 1), addi(A7, ZERO, 93), ecall()};
    vs = '{csrrs(T3, 12'h141, ZERO), addi(T3, T3, 4), csrrw(ZERO, 12'h141, T3), ecall(), sret()};
    hs = '{lui(T4, 20'hBFFFF), addi(A5, ZERO, 72), sb(A5, T4, 0), csrrs(T3, 12'h141, ZERO),
           addi(T3, T3, 4), csrrw(ZERO, 12'h141, T3), sret()};
    for (int i = 0; i < 21; i++) put(32'h0000_0000 + 4*i, u[i]);
    for (int i = 0; i < 5; i++)  put(32'h4000_0000 + 4*i, vs[i]);
    for (int i = 0; i < 7; i++)  put(32'h8000_0000 + 4*i, hs[i]);
    put(32'h0000_1004, 32'h0);
    @(negedge clk); ld_we = 0; rst = 0;
    // emulate instructions one by one, as the timing simulator would
    while (!halted) begin
      @(negedge clk); emulate = 1; @(negedge clk); emulate = 0;
      while (!trace_valid) @(negedge clk);
    end
    repeat (2) @(negedge clk);
    check(32'(n_seen), 31, "dynamic instruction count");
    check(dut.u_x.x[A2], 2, "add");  check(dut.u_x.x[A3], 8, "sub");
    check(dut.u_x.x[A4], 40, "slli"); check(dut.u_x.x[T1], 8, "sw/lw");
    check(dut.u_x.x[T2], 5, "sb/lbu"); check(dut.u_x.x[S0], 32'h500, "byte merged into word");
    check(dut.u_x.x[S1], 1, "skipped and returned"); check(dut.u_x.x[RA], 32'h3c, "jal link");
    check(dut.u_x.x[A1], 32'hFFFF_FFFD, "negative immediate");
    check(32'(n_out), 1, "one console byte"); check({24'd0, last_out}, 72, "console byte 'H'");
    // trace records
    check(seen[6].pc, 32'h18, "sw pc"); check({31'd0, seen[6].store}, 1, "sw store flag");
    check(seen[6].dva, 32'h1000, "sw data address"); check({27'd0, seen[6].rs2}, 13, "sw rs2");
    check({27'd0, seen[6].rd}, 0, "sw writes no register");
    check({31'd0, seen[7].load}, 1, "lw load flag"); check({27'd0, seen[7].rd}, 6, "lw rd");
    check({30'd0, seen[11].cond_branch, seen[11].taken}, 2'b10, "beq not taken");
    check({30'd0, seen[12].cond_branch, seen[12].taken}, 2'b11, "bne taken");
    check(seen[13].pc, 32'h38, "branch target");
    check({29'd0, seen[15].virt, seen[15].priv}, {29'd0, 1'b1, PRIV_U}, "ecall in VU");
    check(seen[16].pc, 32'h4000_0000, "trap to VS handler");
    check({29'd0, seen[16].virt, seen[16].priv}, {29'd0, 1'b1, PRIV_S}, "VS mode");
    check(seen[20].pc, 32'h8000_0000, "hypercall to HS handler");
    check({29'd0, seen[20].virt, seen[20].priv}, {29'd0, 1'b0, PRIV_S}, "HS mode");
    check(seen[27].pc, 32'h4000_0010, "return to VS");
    check(seen[28].pc, 32'h48, "return to VU");
    check({31'd0, seen[30].exit_call}, 1, "exit flag"); check({31'd0, seen[29].exit_call}, 0, "no exit flag");
    check({30'd0, seen[30].os_id, seen[30].pid}, 0, "ids are 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
