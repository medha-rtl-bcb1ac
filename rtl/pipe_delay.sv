// pipe_delay: a DEPTH-stage shift register of WIDTH-bit words with a
// synchronous reset to zero. DEPTH = 0 is a plain wire. Used to carry
// valid bits, write addresses and operands alongside the arithmetic
// pipelines (the "pipeline registers" of the datapath).
module pipe_delay #(
  parameter int unsigned WIDTH = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] sr [DEPTH];
    always_ff @(posedge clk) begin
      if (rst) begin
        for (int i = 0; i < int'(DEPTH); i++) sr[i] <= '0;
      end else begin
        sr[0] <= d;
        for (int i = 1; i < int'(DEPTH); i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[DEPTH-1];
  end
endmodule
