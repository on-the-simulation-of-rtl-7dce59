// tb_hazard_unit: self-checking test of the hazard detection unit.
// Builds stage-register contents by hand for each hazard case (load-use,
// branch operand from EX and from a load in MEM, ALU results that forwarding
// covers, x0, D-cache structural conflicts in both directions, the flush
// behind a taken branch and the emulate request) and checks each output.
module tb_hazard_unit;
  import hvsim_pkg::*;
  int checks = 0, failures = 0;
  stage_t if_s, id_s, ex_s, mem_s;
  logic if_tlb_miss, ex_ready, id_leaving, exit_seen, req_pending;
  logic ld_use_stall, branch_stall, id_hold, mem_struct_stall, ex_adv, if_struct_stall, flush_if, emulate;

  hazard_unit dut (.*);

  task automatic check(input logic got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %b exp %b", what, got, exp); end
  endtask
  function automatic stage_t st(input logic [4:0] rs1, rs2, rd, input logic ld, stq, br, tk);
    stage_t s = '0;
    s.valid = 1; s.started = 1; s.rem = 1;
    s.tr.rs1 = rs1; s.tr.rs2 = rs2; s.tr.rd = rd; s.tr.load = ld; s.tr.store = stq;
    s.tr.cond_branch = br; s.tr.taken = tk; s.used_dc = ld | stq;
    return s;
  endfunction
  task automatic clear();
    if_s = '0; id_s = '0; ex_s = '0; mem_s = '0;
    if_tlb_miss = 0; ex_ready = 0; id_leaving = 0; exit_seen = 0; req_pending = 0;
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clear();
    id_s = st(5, 6, 7, 0, 0, 0, 0); ex_s = st(1, 0, 5, 1, 0, 0, 0); #1;
    check(ld_use_stall, 1, "load-use on rs1"); check(id_hold, 1, "hold");
    ex_s = st(1, 0, 6, 1, 0, 0, 0); #1; check(ld_use_stall, 1, "load-use on rs2");
    ex_s = st(1, 0, 5, 0, 0, 0, 0); #1;
    check(ld_use_stall, 0, "ALU result forwarded"); check(id_hold, 0, "no hold");
    id_s = st(0, 6, 7, 0, 0, 0, 0); ex_s = st(1, 0, 0, 1, 0, 0, 0); #1;
    check(ld_use_stall, 0, "x0 never a dependence");
    // branches resolved in ID
    clear(); id_s = st(5, 6, 0, 0, 0, 1, 0); ex_s = st(1, 2, 5, 0, 0, 0, 0); #1;
    check(branch_stall, 1, "branch needs ALU result from EX");
    ex_s.valid = 0; mem_s = st(1, 2, 6, 1, 0, 0, 0); #1;
    check(branch_stall, 1, "branch needs load result in MEM");
    mem_s = st(1, 2, 6, 0, 0, 0, 0); #1;
    check(branch_stall, 0, "ALU result in MEM is forwarded to ID");
    id_s = st(5, 0, 1, 0, 0, 0, 1); ex_s = st(1, 2, 5, 0, 0, 0, 0); #1;
    check(branch_stall, 1, "JALR needs rs1 in ID");
    id_s = st(0, 0, 1, 0, 0, 0, 1); #1;
    check(branch_stall, 0, "JAL needs no register");
    // structural hazard on the D-cache
    clear(); if_s = st(0, 0, 0, 0, 0, 0, 0); if_s.started = 0; if_tlb_miss = 1;
    mem_s = st(1, 0, 0, 1, 0, 0, 0); mem_s.rem = 50; #1;
    check(if_struct_stall, 1, "IF page walk waits for busy MEM");
    mem_s.rem = 1; #1; check(if_struct_stall, 0, "MEM in last cycle releases");
    ex_s = st(1, 0, 2, 0, 1, 0, 0); ex_ready = 1; #1;
    check(ex_adv, 1, "store enters MEM"); check(if_struct_stall, 1, "MEM wins a tie");
    if_tlb_miss = 0; #1; check(if_struct_stall, 0, "I-TLB hit needs no D-cache");
    clear(); if_s = st(0, 0, 0, 0, 0, 0, 0); if_s.used_dc = 1; if_s.rem = 20;
    ex_s = st(1, 0, 2, 1, 0, 0, 0); ex_ready = 1; #1;
    check(mem_struct_stall, 1, "load waits for IF page walk"); check(ex_adv, 0, "EX held");
    if_s.rem = 1; #1; check(ex_adv, 1, "IF done releases");
    ex_s = st(1, 0, 2, 0, 0, 0, 0); if_s.rem = 20; #1; check(ex_adv, 1, "ALU op does not need D-cache");
    // control hazard
    clear(); if_s = st(0, 0, 0, 0, 0, 0, 0); id_s = st(1, 2, 0, 0, 0, 1, 1); id_leaving = 1; #1;
    check(flush_if, 1, "taken branch flushes IF");
    id_s.tr.taken = 0; #1; check(flush_if, 0, "not-taken branch: prediction right");
    // emulate request
    clear(); #1; check(emulate, 1, "empty IF requests");
    req_pending = 1; #1; check(emulate, 0, "one request at a time");
    req_pending = 0; exit_seen = 1; #1; check(emulate, 0, "no request after exit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
