// mod_mul: pipelined modular multiplier p = a*b mod q with a run-time
// modulus, LAT cycles from in_valid to out_valid (one result per cycle).
// Reduction: with SPARSE_Q0 = 1 the product is reduced by the add-shift
// q0_reduce block (the sparse prime q0 of the first RNS modulus; q is then
// ignored). Otherwise a Barrett reduction with the constant
// mu = floor(2^(2W)/q) (supplied by the host) is used, followed by at most
// two subtractions of q; mu is MU_W = W+8 bits wide, so any q >= 2^(W-7)
// works (60- and 54-bit moduli with W = 60).
// The published multiplier reduces by sparse pseudo-Mersenne primes and is
// pipelined over about 20 stages; only q0 is published, so Barrett is this
// design's choice for the other moduli. The product and reduction are
// formed in the first stage and the result then travels through LAT-1
// registers, a form that retiming tools spread over the stages.
module mod_mul #(
  parameter int unsigned W         = 60,
  parameter int unsigned LAT       = 20,
  parameter bit          SPARSE_Q0 = 1'b0,
  localparam int unsigned MU_W     = W + 8
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic [W-1:0]    a,
  input  logic [W-1:0]    b,
  input  logic [W-1:0]    q,
  input  logic [MU_W-1:0] mu,
  output logic            out_valid,
  output logic [W-1:0]    p
);
  logic [2*W-1:0]      x;
  logic [2*W+MU_W-1:0] xm;
  logic [W+1:0]        qhat;
  logic [W+1:0]        r0, r1, r2;
  logic [W-1:0]        res;
  logic [59:0]         r_sparse;

  assign x = a * b;

  if (SPARSE_Q0) begin : g_sparse
    logic [119:0] x120;
    assign x120 = 120'(x);
    q0_reduce u_red (.x(x120), .r(r_sparse));
  end else begin : g_nosparse
    assign r_sparse = '0;
  end

  always_comb begin
    xm   = x * mu;
    qhat = (W+2)'(xm >> (2*W));
    r0   = (W+2)'(x - qhat * q);          // r0 < 3q
    r1   = (r0 >= {2'b00, q}) ? r0 - {2'b00, q} : r0;
    r2   = (r1 >= {2'b00, q}) ? r1 - {2'b00, q} : r1;
    res  = SPARSE_Q0 ? W'(r_sparse) : r2[W-1:0];
  end

  // after two corrections the Barrett remainder is below q
  a_reduced: assert property (@(posedge clk) disable iff (rst)
    (in_valid && !SPARSE_Q0) |-> r2[W+1:W] == 2'b00);

  pipe_delay #(.WIDTH(W + 1), .DEPTH(LAT)) u_pipe (
    .clk(clk), .rst(rst), .d({in_valid, res}), .q({out_valid, p}));
endmodule
