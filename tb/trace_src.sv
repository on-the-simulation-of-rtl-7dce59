// trace_src: testbench stand-in for the functional simulator. It answers
// each `emulate` pulse of the timing simulator, after a random delay of 1 to
// 4 cycles, with the next record of a trace list given by the testbench.
module trace_src
  import hvsim_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        emulate,
  input  trace_t      list [16],
  output logic        trace_valid,
  output logic [31:0] inst_num,
  output trace_t      trace
);
  int next_i, wait_c;
  logic busy;
  always_ff @(posedge clk) begin
    if (rst) begin
      next_i <= 0; busy <= 0; trace_valid <= 0; wait_c <= 0; inst_num <= 0; trace <= '0;
    end else begin
      trace_valid <= 0;
      if (emulate && !busy) begin busy <= 1; wait_c <= 1 + int'($urandom % 4); end
      else if (busy) begin
        if (wait_c == 1) begin
          busy <= 0; trace_valid <= 1; trace <= list[next_i];
          inst_num <= 32'(next_i); next_i <= next_i + 1;
        end
        wait_c <= wait_c - 1;
      end
    end
  end
endmodule
