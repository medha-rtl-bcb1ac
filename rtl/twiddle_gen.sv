// twiddle_gen: twiddle factor unit coupled to one butterfly core.
// Twiddles are not kept for every ring: the table holds the constants of
// one base ring, x^N - z^N (z a primitive 4N-th root of unity), for the
// forward (dir 0) and inverse (dir 1) transform. A twiddle of the ring
// selected by req_ring is produced on the fly as
//      w = table[dir][idx] * scale[ring][dir][stage]  (mod q)
// through the unit's own modular multiplier. For the ring node (stage s,
// group g) the three rings differ only by a per-stage factor:
//   ring 0  x^N - z^N : scale 1
//   ring 1  x^N + z^N : scale z^(+-N/2^s)
//   ring 2  x^N + 1   : scale z^(+-N/2^(s+1))
// which is how one set of stored constants serves the two half rings of
// the degree-2N method and the plain negacyclic ring.
// In ext mode (req_ext) the multiplier computes ext_a * ext_b instead; the
// main core uses that to feed a scalar (Split/Join constant) into the same
// timing path as a twiddle.
// Timing: one result per cycle, w_valid/w appear LAT+1 cycles after
// req_valid (1 table-read stage + LAT multiplier stages).
// Interface: tables are written by the host through cfg_*; the table
// index layout (which twiddle sits at which index) is decided by the
// address generator of rpau_main_core.
// Storing only a few initial constants and deriving the rest with the
// multiplier is the published idea; the exact table contents and the
// per-stage scale form are this design's reconstruction.
module twiddle_gen #(
  parameter int unsigned W     = 60,
  parameter int unsigned LAT   = 20,
  parameter int unsigned LOGN  = 14,
  parameter int unsigned DEPTH = 1028,
  parameter bit          SPARSE_Q0 = 1'b0,
  localparam int unsigned MU_W = W + 8,
  localparam int unsigned IW   = $clog2(DEPTH),
  localparam int unsigned SW   = $clog2(LOGN)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [W-1:0]    q,
  input  logic [MU_W-1:0] mu,
  // configuration
  input  logic            cfg_tf_we,
  input  logic            cfg_tf_dir,
  input  logic [IW-1:0]   cfg_tf_addr,
  input  logic            cfg_scl_we,
  input  logic [1:0]      cfg_scl_ring,
  input  logic            cfg_scl_dir,
  input  logic [SW-1:0]   cfg_scl_stage,
  input  logic [W-1:0]    cfg_data,
  // request
  input  logic            req_valid,
  input  logic            req_ext,
  input  logic            req_dir,
  input  logic [IW-1:0]   req_idx,
  input  logic [1:0]      req_ring,
  input  logic [SW-1:0]   req_stage,
  input  logic [W-1:0]    ext_a,
  input  logic [W-1:0]    ext_b,
  // result
  output logic            w_valid,
  output logic [W-1:0]    w
);
  logic [W-1:0] tbl_fwd [DEPTH];
  logic [W-1:0] tbl_inv [DEPTH];
  logic [W-1:0] scale_mem [3][2][LOGN];

  always_ff @(posedge clk) begin
    if (cfg_tf_we && !cfg_tf_dir) tbl_fwd[cfg_tf_addr] <= cfg_data;
    if (cfg_tf_we &&  cfg_tf_dir) tbl_inv[cfg_tf_addr] <= cfg_data;
    if (cfg_scl_we && cfg_scl_ring < 2'd3)
      scale_mem[cfg_scl_ring][cfg_scl_dir][cfg_scl_stage] <= cfg_data;
  end

  // stage 1: table and scale read
  logic         v1;
  logic [W-1:0] a1, b1;
  logic [W-1:0] rd_fwd, rd_inv;
  logic         ext1, dir1;
  logic [W-1:0] ext_a1;
  always_ff @(posedge clk) begin
    rd_fwd <= tbl_fwd[req_idx];
    rd_inv <= tbl_inv[req_idx];
  end
  assign a1 = ext1 ? ext_a1 : (dir1 ? rd_inv : rd_fwd);

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0; b1 <= '0; ext1 <= 1'b0; dir1 <= 1'b0; ext_a1 <= '0;
    end else begin
      v1 <= req_valid;
      ext1 <= req_ext; dir1 <= req_dir; ext_a1 <= ext_a;
      b1 <= req_ext ? ext_b :
            (req_ring < 2'd3 ? scale_mem[req_ring][req_dir][req_stage] : '0);
    end
  end

  mod_mul #(.W(W), .LAT(LAT), .SPARSE_Q0(SPARSE_Q0)) u_mul (
    .clk(clk), .rst(rst), .in_valid(v1), .a(a1), .b(b1), .q(q), .mu(mu),
    .out_valid(w_valid), .p(w));
endmodule
