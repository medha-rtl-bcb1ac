// dyadic_core: one coefficient-wise (dyadic) arithmetic unit of the
// dyadic core group. Per cycle it accepts one coefficient triple and
// returns, after a fixed LAT+1 cycles for every mode:
//   DY_ADD: a+b mod q      DY_SUB: a-b mod q
//   DY_MUL: a*b mod q      DY_MAC: c + a*b mod q (multiply-accumulate)
// The uniform latency lets the controller stream operands without
// hazards; ADD and SUB results are simply delayed. The multiplier is the
// same pipelined modular multiplier as in the butterfly cores. The mode
// set follows the dyadic operations of the published design (dyadic
// multiply and accumulate used in key switching); the fixed latency is
// this design's choice. A TAG_W-bit tag (the write address) travels with
// the data.
module dyadic_core
  import medha_pkg::*;
#(
  parameter int unsigned W         = 60,
  parameter int unsigned LAT       = 20,
  parameter int unsigned TAG_W     = 16,
  parameter bit          SPARSE_Q0 = 1'b0,
  localparam int unsigned MU_W     = W + 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [W-1:0]     q,
  input  logic [MU_W-1:0]  mu,
  input  logic             in_valid,
  input  dy_mode_e         mode,
  input  logic [W-1:0]     a,
  input  logic [W-1:0]     b,
  input  logic [W-1:0]     c,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [W-1:0]     out,
  output logic [TAG_W-1:0] out_tag
);
  logic [W-1:0] s_ab, d_ab, s_pc, d_unused;
  mod_addsub #(.W(W)) u_as (.a(a), .b(b), .q(q), .sum(s_ab), .diff(d_ab));

  // multiplier path
  logic [W-1:0] prod;
  logic         prod_valid;
  mod_mul #(.W(W), .LAT(LAT), .SPARSE_Q0(SPARSE_Q0)) u_mul (
    .clk, .rst, .in_valid(in_valid && (mode == DY_MUL || mode == DY_MAC)),
    .a, .b, .q, .mu, .out_valid(prod_valid), .p(prod));

  // side channel: mode, tag, accumulator operand and add/sub result
  localparam int unsigned SW = 1 + 2 + TAG_W + W + W;
  logic [SW-1:0] side_d;
  pipe_delay #(.WIDTH(SW), .DEPTH(LAT)) u_side (
    .clk, .rst,
    .d({in_valid, mode, in_tag, c, (mode == DY_SUB) ? d_ab : s_ab}),
    .q(side_d));
  logic             v_d;
  dy_mode_e         mode_d;
  logic [TAG_W-1:0] tag_d;
  logic [W-1:0]     c_d, as_d;
  assign {v_d, mode_d, tag_d, c_d, as_d} = side_d;

  mod_addsub #(.W(W)) u_acc (.a(prod), .b(c_d), .q(q), .sum(s_pc), .diff(d_unused));

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0; out <= '0; out_tag <= '0;
    end else begin
      out_valid <= v_d;
      out_tag   <= tag_d;
      unique case (mode_d)
        DY_MUL:  out <= prod;
        DY_MAC:  out <= s_pc;
        default: out <= as_d;
      endcase
    end
  end

  a_mul_aligned: assert property (@(posedge clk) disable iff (rst)
    (v_d && (mode_d == DY_MUL || mode_d == DY_MAC)) |-> prod_valid);
endmodule
