// program_controller: one of the two instruction streams of the
// accelerator. It holds a program memory (written by the host before
// start) and presents the instruction at its program counter to the
// program execution unit, which decides in the same cycle whether it may
// issue (advance). Instructions issue in order, at most one per cycle;
// a cycle in which the current instruction cannot issue is a stall and
// is counted. OP_END stops the stream (running drops); start restarts at
// address 0. The published design drives its RPAUs from a microcoded
// instruction stream split into two concurrently running programs (for
// the main and the dyadic core groups); the program memory format and
// counters are this design's choices.
module program_controller
  import medha_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          imem_we,
  input  logic [AW-1:0] imem_addr,
  input  instr_t        imem_wdata,
  input  logic          start,
  output logic          running,
  output instr_t        cur,
  input  logic          advance,
  output logic [31:0]   stall_cnt,
  output logic [31:0]   issue_cnt
);
  instr_t        imem [DEPTH];
  logic [AW-1:0] pc;

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_addr] <= imem_wdata;
  end

  assign cur = imem[pc];

  always_ff @(posedge clk) begin
    if (rst) begin
      pc <= '0; running <= 1'b0; stall_cnt <= '0; issue_cnt <= '0;
    end else if (start) begin
      pc <= '0; running <= 1'b1; stall_cnt <= '0; issue_cnt <= '0;
    end else if (running) begin
      if (advance) begin
        issue_cnt <= issue_cnt + 1'b1;
        if (cur.op == OP_END) running <= 1'b0;
        else                  pc <= pc + 1'b1;
      end else begin
        stall_cnt <= stall_cnt + 1'b1;
      end
    end
  end

  a_no_write_while_running: assert property (@(posedge clk) disable iff (rst) imem_we |-> !running);
  a_pc_in_range: assert property (@(posedge clk) disable iff (rst)
    (running && advance && cur.op != OP_END) |-> pc != AW'(DEPTH - 1));
endmodule
