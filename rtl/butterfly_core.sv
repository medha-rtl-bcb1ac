// butterfly_core: the unified compute core of the NTT unit (RPAU.All).
// One modular multiplier (mod_mul, LAT stages), one modular adder/
// subtractor pair (mod_addsub) and a few multiplexers implement:
//   BF_DIT  Cooley-Tukey (decimation in time) butterfly of the forward NTT:
//           (u', t') = (u + w*t, u - w*t)
//   BF_DIF  Gentleman-Sande (decimation in frequency) butterfly of the
//           inverse NTT with the 1/2 scaling folded in:
//           (u', t') = ((u + t)/2, (u - t)*w/2)
//   BF_ADD / BF_SUB  coefficient-wise u + t / u - t   (on the u output)
//   BF_MUL           coefficient-wise t * w           (on the t output)
// The same butterflies perform Split (DIT with w = z^N) and Join (DIF with
// w = z^-N) of the degree-2N method.
//
// Timing ("address delaying"): for BF_DIT only t and w enter at in_valid;
// the matching u is read later by the memory controller and must be on
// dly_u exactly LAT cycles after in_valid, when w*t leaves the multiplier.
// Both DIT results leave together LAT+1 cycles after in_valid, so u never
// travels through a LAT-deep register chain. For BF_DIF u and t enter
// together; (u+t)/2 leaves after 1 cycle and (u-t)*w/2 after LAT+1 cycles,
// i.e. the two results are written at different times. BF_ADD/BF_SUB
// results leave after 1 cycle, BF_MUL after LAT+1.
// Each input carries a TAG_W-bit tag (the write address) that leaves with
// the corresponding result. The caller must not mix modes inside the
// pipeline (the main core drains between instructions). Reset clears the
// valid bits only.
// The operation set and the one-multiplier structure follow the published
// core; the tag interface and exact cycle offsets are this design's own.
module butterfly_core
  import medha_pkg::*;
#(
  parameter int unsigned W     = 60,
  parameter int unsigned LAT   = 20,
  parameter int unsigned TAG_W = 16,
  parameter bit          SPARSE_Q0 = 1'b0,
  localparam int unsigned MU_W = W + 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [W-1:0]     q,
  input  logic [MU_W-1:0]  mu,
  input  logic             in_valid,
  input  bf_mode_e         mode,
  input  logic [W-1:0]     in_u,
  input  logic [W-1:0]     in_t,
  input  logic [W-1:0]     in_w,
  input  logic [TAG_W-1:0] in_tag_u,
  input  logic [TAG_W-1:0] in_tag_t,
  input  logic [W-1:0]     dly_u,
  output logic             out_u_valid,
  output logic [W-1:0]     out_u,
  output logic [TAG_W-1:0] out_u_tag,
  output logic             out_t_valid,
  output logic [W-1:0]     out_t,
  output logic [TAG_W-1:0] out_t_tag
);
  // ---------------- shared adder / subtractor ------------------------
  logic [W-1:0] add_a, add_b, sum, diff;
  logic         dit_now;            // DIT product leaving the multiplier
  logic [W-1:0] prod;
  logic         prod_valid;
  bf_mode_e     mode_d;
  logic [TAG_W-1:0] tag_u_d, tag_t_d;

  assign add_a = dit_now ? dly_u : in_u;
  assign add_b = dit_now ? prod  : in_t;

  mod_addsub #(.W(W)) u_addsub (.a(add_a), .b(add_b), .q(q), .sum(sum), .diff(diff));

  // ---------------- multiplier -----------------------------------------
  logic [W-1:0] mul_a;
  assign mul_a = (mode == BF_DIF) ? diff : in_t;
  logic mul_in_valid;
  assign mul_in_valid = in_valid && (mode inside {BF_DIT, BF_DIF, BF_MUL});

  mod_mul #(.W(W), .LAT(LAT), .SPARSE_Q0(SPARSE_Q0)) u_mul (
    .clk(clk), .rst(rst), .in_valid(mul_in_valid), .a(mul_a), .b(in_w),
    .q(q), .mu(mu), .out_valid(prod_valid), .p(prod));

  // mode and tags travel beside the multiplier
  logic [2:0] mode_bits_d;
  pipe_delay #(.WIDTH(3 + 2*TAG_W), .DEPTH(LAT)) u_side (
    .clk(clk), .rst(rst), .d({mode, in_tag_u, in_tag_t}),
    .q({mode_bits_d, tag_u_d, tag_t_d}));
  assign mode_d  = bf_mode_e'(mode_bits_d);
  assign dit_now = prod_valid && (mode_d == BF_DIT);

  function automatic logic [W-1:0] half(input logic [W-1:0] x, input logic [W-1:0] m);
    logic [W:0] s;
    s = x[0] ? ({1'b0, x} + {1'b0, m}) : {1'b0, x};
    return W'(s >> 1);
  endfunction

  // ---------------- output registers -----------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      out_u_valid <= 1'b0;
      out_t_valid <= 1'b0;
      out_u <= '0; out_t <= '0; out_u_tag <= '0; out_t_tag <= '0;
    end else begin
      // u output
      out_u_valid <= 1'b0;
      if (dit_now) begin
        out_u_valid <= 1'b1;
        out_u       <= sum;
        out_u_tag   <= tag_u_d;
      end else if (in_valid && (mode inside {BF_DIF, BF_ADD, BF_SUB})) begin
        out_u_valid <= 1'b1;
        out_u       <= (mode == BF_DIF) ? half(sum, q) : (mode == BF_ADD) ? sum : diff;
        out_u_tag   <= in_tag_u;
      end
      // t output
      out_t_valid <= prod_valid;
      out_t_tag   <= tag_t_d;
      unique case (mode_d)
        BF_DIT:  out_t <= diff;
        BF_DIF:  out_t <= half(prod, q);
        default: out_t <= prod;
      endcase
    end
  end

  // A DIT product and a new add/sub/DIF input must never meet in one cycle.
  a_no_mix: assert property (@(posedge clk) disable iff (rst)
    !(dit_now && in_valid && (mode inside {BF_DIF, BF_ADD, BF_SUB})));
endmodule
