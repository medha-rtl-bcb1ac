// rpau_dyadic: the dyadic core group of one RPAU. DYD dyadic cores work
// on the same polynomials as the main core group but through their own
// memory ports, so a dyadic instruction can run while the main group
// runs an NTT (the two groups are issued by different program streams).
// Schedule: N/DYD slots; in slot k lane l handles coefficient
// n = l*(N/DYD) + k, so the lanes always touch different banks. Per slot
// the operands are read at T, enter the dyadic core at T+1 and the result
// is written to dst at T+LAT+2. Instructions:
//   DADD/DSUB/DMUL  dst = src1 op src2
//   DMAC            dst = dst + src1*src2
//   DMACK           dst = dst + src1*KSK0, where KSK0 is produced on the
//                   fly by one ksk0_core per lane from seed[sidx]; src2
//                   names the key slot and selects the key stream. The
//                   PRNG warm-up (19 cycles) precedes the first slot.
// Busy for N/DYD + LAT + 3 cycles (4119 for the defaults; the published dyadic
// operation takes about 4096), plus 19 for DMACK.
// Generating KSK0 with a PRNG and the 4-core dyadic group follow the
// published design; the lane/slot mapping is this design's choice.
// Lint reports the mask and unused fields of the latched instruction
// unused: RPAU selection happens before this group.
module rpau_dyadic
  import medha_pkg::*;
#(
  parameter int unsigned W         = 60,
  parameter int unsigned N         = 16384,
  parameter int unsigned DYD       = 4,
  parameter int unsigned LAT       = 20,
  parameter bit          SPARSE_Q0 = 1'b0,
  localparam int unsigned MU_W     = W + 8,
  localparam int unsigned LOGN     = $clog2(N),
  localparam int unsigned SLOTS    = N / DYD,
  localparam int unsigned KW       = $clog2(SLOTS)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [W-1:0]      q,
  input  logic [MU_W-1:0]   mu,
  input  logic [63:0]       seed [NUM_SCALAR],
  input  logic [6:0]        qbits,
  input  logic              instr_valid,
  input  instr_t            instr,
  output logic              busy,
  output logic              d_rd_en   [DYD][3],
  output logic [POLY_W-1:0] d_rd_poly [DYD][3],
  output logic [LOGN-1:0]   d_rd_n    [DYD][3],
  input  logic [W-1:0]      d_rd_data [DYD][3],
  output logic              d_wr_en   [DYD],
  output logic [POLY_W-1:0] d_wr_poly [DYD],
  output logic [LOGN-1:0]   d_wr_n    [DYD],
  output logic [W-1:0]      d_wr_data [DYD]
);
  typedef enum logic [1:0] {S_IDLE, S_WARM, S_RUN, S_DRAIN} state_e;
  state_e         state;
  instr_t         ci;
  logic [KW-1:0]  k;
  logic [7:0]     cnt;
  logic           v1;
  logic [KW-1:0]  k1;
  logic           prng_start;
  logic           prng_valid [DYD];
  logic [W-1:0]   prng_coef  [DYD];
  dy_mode_e       mode;

  always_comb begin
    unique case (ci.op)
      OP_DADD: mode = DY_ADD;
      OP_DSUB: mode = DY_SUB;
      OP_DMUL: mode = DY_MUL;
      default: mode = DY_MAC;
    endcase
  end

  assign busy = (state != S_IDLE);
  assign prng_start = (state == S_IDLE) && instr_valid && instr.op == OP_DMACK;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; ci <= '0; k <= '0; cnt <= '0; v1 <= 1'b0; k1 <= '0;
    end else begin
      v1 <= (state == S_RUN);
      k1 <= k;
      unique case (state)
        S_IDLE: if (instr_valid && is_dyd_op(instr.op)) begin
          ci <= instr; k <= '0;
          if (instr.op == OP_DMACK) begin state <= S_WARM; cnt <= 8'd19; end
          else state <= S_RUN;
        end
        S_WARM: begin
          cnt <= cnt - 1'b1;
          if (cnt == 8'd1) state <= S_RUN;
        end
        S_RUN: begin
          k <= k + 1'b1;
          if (k == KW'(SLOTS - 1)) begin state <= S_DRAIN; cnt <= 8'(LAT + 3); end
        end
        S_DRAIN: begin
          cnt <= cnt - 1'b1;
          if (cnt == 8'd1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  for (genvar l = 0; l < int'(DYD); l++) begin : g_lane
    logic [LOGN-1:0] n_now, out_n;
    logic            ov;
    logic [W-1:0]    ores;
    assign n_now = LOGN'(l * int'(SLOTS)) + LOGN'(k);

    always_comb begin
      d_rd_en[l][0] = (state == S_RUN);
      d_rd_en[l][1] = (state == S_RUN) && ci.op != OP_DMACK;
      d_rd_en[l][2] = (state == S_RUN) && (ci.op inside {OP_DMAC, OP_DMACK});
      d_rd_poly[l][0] = ci.src1;
      d_rd_poly[l][1] = ci.src2;
      d_rd_poly[l][2] = ci.dst;
      for (int p = 0; p < 3; p++) d_rd_n[l][p] = n_now;
    end

    ksk0_core #(.W(W), .LANE_W(4)) u_ksk0 (
      .clk, .rst, .start(prng_start), .seed(seed[instr.sidx]),
      .stream({11'b0, instr.src2}), .lane(4'(l)), .q, .qbits,
      .next(v1 && ci.op == OP_DMACK), .coef_valid(prng_valid[l]), .coef(prng_coef[l]));

    dyadic_core #(.W(W), .LAT(LAT), .TAG_W(LOGN), .SPARSE_Q0(SPARSE_Q0)) u_dy (
      .clk, .rst, .q, .mu, .in_valid(v1), .mode,
      .a(d_rd_data[l][0]),
      .b(ci.op == OP_DMACK ? prng_coef[l] : d_rd_data[l][1]),
      .c(d_rd_data[l][2]),
      .in_tag(LOGN'(l * int'(SLOTS)) + LOGN'(k1)),
      .out_valid(ov), .out(ores), .out_tag(out_n));

    assign d_wr_en[l]   = ov;
    assign d_wr_poly[l] = ci.dst;
    assign d_wr_n[l]    = out_n;
    assign d_wr_data[l] = ores;

    a_prng_ready: assert property (@(posedge clk) disable iff (rst)
      (v1 && ci.op == OP_DMACK) |-> prng_valid[l]);
  end

  a_no_instr_when_busy: assert property (@(posedge clk) disable iff (rst)
    (instr_valid && is_dyd_op(instr.op)) |-> !busy);
endmodule
