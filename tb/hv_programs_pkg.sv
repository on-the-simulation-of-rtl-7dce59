// hv_programs_pkg: the software the simulator runs in the end-to-end tests.
//
// Each function returns the machine words of one routine, placed from its
// start address upward:
//  * search_user - linear search of N words at 0x400 for the key stored
//    right after the array; writes the index (one byte, 0xFF if absent) to
//    the console with the write system call (a7=64), then exits (a7=93);
//  * sort_user   - bubble sort of N words at 0x400, then writes the sorted
//    values as N bytes with one write system call, then exits;
//  * write_handler - the HS-level trap handler at 0x8000_0000: saves its
//    working registers (context switch), copies a2 bytes from the user
//    buffer at a1 to the console port 0xBFFF_F000, restores the registers,
//    steps sepc past the ECALL and returns with SRET. In a non-virtualized
//    system it is the operating system's system call handler; in a
//    virtualized system it is the hypervisor's hypercall handler;
//  * guest_handler - the paravirtualized guest OS handler at 0x4000_0000
//    (VS-mode): saves registers, forwards the write as a hypercall (ECALL),
//    restores, steps vsepc and returns to the user with SRET. It is
//    GUEST_LEN instructions long and runs once per system call, which is
//    exactly the extra work of the virtualized system.
// The data arrays share the page of the user code, as in a small binary.
// The U, VS and HS code sits at the bottom of the U/VU, VS and HS address
// portions; the save areas are at 0x4000_4040 and 0x8000_4040 (offset 0x40 keeps them
// off the D-cache block that holds the page table entry of page 0).
package hv_programs_pkg;
  import rv_asm_pkg::*;

  localparam int GUEST_LEN = 12;

  typedef logic [31:0] words_t[$];

  function automatic words_t search_user(input int n);
    words_t w;
    w = '{addi(S0, ZERO, 1024), addi(S1, ZERO, n), lw(A5, S0, 4 * n), addi(T0, ZERO, 0),
          // loop at 0x10
          slli(T1, T0, 2), add(T1, T1, S0), lw(T2, T1, 0), beq(T2, A5, 16),
          addi(T0, T0, 1), blt(T0, S1, -20),
          addi(T0, ZERO, 255),
          // found at 0x2c
          lui(A1, 20'h3), sb(T0, A1, 0), addi(A0, ZERO, 1), addi(A2, ZERO, 1),
          addi(A7, ZERO, 64), ecall(),
          addi(A7, ZERO, 93), addi(A0, ZERO, 0), ecall()};
    return w;
  endfunction

  function automatic words_t sort_user(input int n);
    words_t w;
    w = '{addi(S0, ZERO, 1024), addi(S1, ZERO, n - 1),
          // outer at 0x08
          addi(T0, ZERO, 0), add(T3, S0, ZERO),
          // inner at 0x10
          lw(T1, T3, 0), lw(T2, T3, 4), bge(T2, T1, 12), sw(T2, T3, 0), sw(T1, T3, 4),
          addi(T3, T3, 4), addi(T0, T0, 1), blt(T0, S1, -28),
          addi(S1, S1, -1), bne(S1, ZERO, -44),
          // output at 0x38
          lui(A1, 20'h3), addi(T0, ZERO, 0), add(T3, S0, ZERO), addi(A3, ZERO, n),
          // copy loop at 0x48
          add(T2, A1, T0), lw(T1, T3, 0), sb(T1, T2, 0), addi(T3, T3, 4), addi(T0, T0, 1),
          blt(T0, A3, -20),
          addi(A0, ZERO, 1), add(A2, A3, ZERO), addi(A7, ZERO, 64), ecall(),
          addi(A7, ZERO, 93), addi(A0, ZERO, 0), ecall()};
    return w;
  endfunction

  function automatic words_t write_handler();
    words_t w;
    w = '{csrrw(ZERO, 12'h140, T0), lui(T0, 20'h80004),
          sw(T1, T0, 64), sw(T2, T0, 68), sw(A1, T0, 72), sw(A2, T0, 76),
          lui(T2, 20'hBFFFF), beq(A2, ZERO, 24),
          // copy loop at 0x20
          lbu(T1, A1, 0), sb(T1, T2, 0), addi(A1, A1, 1), addi(A2, A2, -1), bne(A2, ZERO, -16),
          // 0x34
          lw(T1, T0, 64), lw(T2, T0, 68), lw(A1, T0, 72), lw(A2, T0, 76),
          csrrs(T0, 12'h141, ZERO), addi(T0, T0, 4), csrrw(ZERO, 12'h141, T0),
          csrrs(T0, 12'h140, ZERO), sret()};
    return w;
  endfunction

  function automatic words_t guest_handler();
    words_t w;
    w = '{csrrw(ZERO, 12'h140, T0), lui(T0, 20'h40004), sw(RA, T0, 64), sw(A7, T0, 68),
          ecall(),
          lw(A7, T0, 68), lw(RA, T0, 64),
          csrrs(T0, 12'h141, ZERO), addi(T0, T0, 4), csrrw(ZERO, 12'h141, T0),
          csrrs(T0, 12'h140, ZERO), sret()};
    return w;
  endfunction
endpackage
