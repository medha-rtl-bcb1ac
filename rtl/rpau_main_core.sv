// rpau_main_core: the main core group of one RPAU — CORES butterfly
// cores with their twiddle generators, the bus switching matrices to the
// CORES memory banks, the automorphism address generators and the
// sequencer that runs one main-group instruction at a time.
//
// Data layout: bank c holds coefficients c*BD .. c*BD+BD-1 of every
// polynomial (BD = N/CORES). Every instruction is a sequence of "slots";
// in each slot every core handles one butterfly or one or two
// coefficients. Instead of delaying data, only the slot number {k,
// stage} is delayed in a shift register; each pipeline step (twiddle
// request, t read, u read, butterfly input, write-back) recomputes its
// bank/port/address from the delayed slot number (address delaying).
//
// Instructions (opcode_e) and their slot schedules:
//   NTT   in place on dst, LOGN stages of BD/2 slots. Forward NTT is a
//         Cooley-Tukey (DIT) network: natural order in, slot i holds the
//         value at psi^(2*brv(i)+1). Stage s pairs elements N>>(s+1)
//         apart; for s < log2(CORES) the pair spans two banks, afterwards
//         it is inside one bank. Timing per slot T: twiddle request at T,
//         t read at T+LAT, u read at T+2*LAT, so u meets the product
//         w*t in the butterfly and only addresses are delayed.
//   INTT  Gentleman-Sande (DIF) network, stages LOGN-1..0, u and t read
//         at T+LAT, outputs halved so the result is exact (no n^-1 step).
//   CADD/CSUB/CMUL  dst = src1 op src2, BD slots (one coefficient per
//         core per cycle). CSCALE dst = src1 * scalar[sidx].
//   SPLIT/JOIN  in place on (src1, src2): the degree-2N to two degree-N
//         conversion, a DIT (DIF) butterfly with w = scalar[sidx]
//         (zeta^N, or zeta^-N for JOIN), BD slots.
//   AUTO  dst = automorphism(src1, galois), BD/2 slots, two coefficients
//         per core per cycle; reads are permuted (auto_addr_gen), writes
//         in order.
//   BCAST the RPAU with id sidx sends src1 on the ring, 2*CORES
//         coefficients per cycle (BD/2 beats); every other executing RPAU
//         writes the beats into dst.
// After the last slot of an NTT stage the sequencer waits LAT+3 cycles
// (all writes of the stage done before the next stage reads), after the
// last stage 2*LAT+4 cycles (pipeline empty) before busy drops.
// NTT cycles = LOGN*(BD/2 + LAT + 3) + LAT + 1 (7511 for the defaults);
// the published core needs about 7200. Coefficient-wise instructions
// keep busy for BD + 2*LAT + 4 cycles here; the published main core needs about
// 512 (two coefficients per core per cycle), a deviation of this design.
// Interface: instr is accepted when instr_valid and busy is low. Memory
// ports connect to mem_access_ctrl (1-cycle read latency).
// Twiddle tables (per core, forward and inverse) and per-stage ring
// scales are loaded by the host; see twiddle_gen for the index map.
// Lint reports the mask field of the latched instruction unused: RPAU
// selection happens before the core, which keeps the whole word.
module rpau_main_core
  import medha_pkg::*;
#(
  parameter int unsigned W         = 60,
  parameter int unsigned N         = 16384,
  parameter int unsigned CORES     = 16,
  parameter int unsigned LAT       = 20,
  parameter bit          SPARSE_Q0 = 1'b0,
  parameter int unsigned ID_W      = 4,
  localparam int unsigned MU_W     = W + 8,
  localparam int unsigned BD       = N / CORES,
  localparam int unsigned LBD      = $clog2(BD),
  localparam int unsigned LOGN     = $clog2(N),
  localparam int unsigned LC       = $clog2(CORES),
  localparam int unsigned TF_DEPTH = BD + LC - 1,
  localparam int unsigned IW       = $clog2(TF_DEPTH),
  localparam int unsigned SW       = $clog2(LOGN)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [W-1:0]      q,
  input  logic [MU_W-1:0]   mu,
  input  logic [W-1:0]      scalar [NUM_SCALAR],
  input  logic [ID_W-1:0]   my_id,
  // twiddle configuration
  input  logic              cfg_tf_we,
  input  logic [LC-1:0]     cfg_tf_core,
  input  logic              cfg_tf_dir,
  input  logic [IW-1:0]     cfg_tf_addr,
  input  logic              cfg_scl_we,
  input  logic [1:0]        cfg_scl_ring,
  input  logic              cfg_scl_dir,
  input  logic [SW-1:0]     cfg_scl_stage,
  input  logic [W-1:0]      cfg_data,
  // instruction
  input  logic              instr_valid,
  input  instr_t            instr,
  output logic              busy,
  // memory (main ports)
  output logic              c_rd_en   [CORES][2],
  output logic [POLY_W-1:0] c_rd_poly [CORES][2],
  output logic [LBD-1:0]    c_rd_addr [CORES][2],
  input  logic [W-1:0]      c_rd_data [CORES][2],
  output logic              c_wr_en   [CORES][2],
  output logic [POLY_W-1:0] c_wr_poly [CORES][2],
  output logic [LBD-1:0]    c_wr_addr [CORES][2],
  output logic [W-1:0]      c_wr_data [CORES][2],
  // broadcast ring
  output logic              tx_valid,
  output logic [W-1:0]      tx_data [CORES][2],
  input  logic              rx_valid,
  input  logic [W-1:0]      rx_data [CORES][2]
);
  localparam int unsigned PD    = 2 * LAT;        // deepest tap
  localparam int unsigned TAG_W = LC + 1 + POLY_W + LBD;
  localparam int unsigned NREQ  = 2 * CORES;

  typedef struct packed {
    logic [LC-1:0]  bank;
    logic           port;
    logic [LBD-1:0] addr;
  } loc_t;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_GAP, S_RECV} state_e;

  state_e          state;
  instr_t          ci;             // current instruction
  logic [SW-1:0]   stage;
  logic [LBD-1:0]  k;
  logic [LBD-1:0]  nslots_m1;
  logic [7:0]      gap_cnt;
  logic [LBD-1:0]  beats;
  logic            last_stage;

  // ---------------- slot delay line (address delaying) -----------------
  logic            sp_v [PD+1];
  logic [LBD-1:0]  sp_k [PD+1];
  logic [SW-1:0]   sp_s [PD+1];

  assign sp_v[0] = (state == S_RUN);
  assign sp_k[0] = k;
  assign sp_s[0] = stage;

  always_ff @(posedge clk) begin
    for (int i = 1; i <= int'(PD); i++) begin
      if (rst) begin
        sp_v[i] <= 1'b0; sp_k[i] <= '0; sp_s[i] <= '0;
      end else begin
        sp_v[i] <= sp_v[i-1]; sp_k[i] <= sp_k[i-1]; sp_s[i] <= sp_s[i-1];
      end
    end
  end

  // ---------------- op properties ----------------------------------------
  logic is_dit, is_dif, is_cw, is_bf, is_src;
  localparam int unsigned TPW = $clog2(PD + 1);
  logic [TPW-1:0] dt, du, bi;
  always_comb begin
    is_dit = ci.op inside {OP_NTT, OP_SPLIT};
    is_dif = ci.op inside {OP_INTT, OP_JOIN};
    is_cw  = ci.op inside {OP_CADD, OP_CSUB, OP_CMUL, OP_CSCALE};
    is_bf  = is_dit || is_dif || is_cw;
    is_src = (ci.sidx == 4'(my_id));
    dt     = (is_dit || is_dif) ? TPW'(LAT) : '0;
    du     = is_dit ? TPW'(2 * LAT) : dt;
    bi     = dt + 1'b1;
  end

  // location of lane (0 = t, 1 = u) of slot (s, k) for core c
  function automatic loc_t slot_loc(input opcode_e op, input logic [SW-1:0] s,
                                    input logic [LBD-1:0] kk, input int c, input int lane);
    loc_t l;
    int   kb, b0, hi, bl, au;
    l = '0;
    if (op inside {OP_NTT, OP_INTT}) begin
      if (int'(s) < int'(LC)) begin
        kb = 1 << (int'(LC) - 1 - int'(s));
        b0 = c & ~kb;
        hi = ((c & kb) != 0) ? 1 : 0;
        l.bank = LC'((lane == 0) ? (b0 | kb) : b0);
        l.port = hi[0];
        l.addr = LBD'(2 * int'(kk) + hi);
      end else begin
        bl = int'(LOGN) - 1 - int'(s);
        au = ((int'(kk) >> bl) << (bl + 1)) | (int'(kk) & ((1 << bl) - 1));
        l.bank = LC'(c);
        l.port = (lane == 1);
        l.addr = LBD'((lane == 0) ? (au | (1 << bl)) : au);
      end
    end else if (op == OP_BCAST) begin
      l.bank = LC'(c); l.port = (lane == 1); l.addr = LBD'(2 * int'(kk) + lane);
    end else if (op == OP_AUTO) begin
      l.bank = LC'(c); l.port = (lane == 1); l.addr = LBD'(int'(kk) + lane * int'(BD / 2));
    end else begin
      l.bank = LC'(c); l.port = (lane == 1); l.addr = kk;
    end
    return l;
  endfunction

  function automatic logic [IW-1:0] tf_index(input logic [SW-1:0] s, input logic [LBD-1:0] kk);
    int bl, au;
    if (int'(s) < int'(LC)) return IW'(int'(BD) - 1 + int'(s));
    bl = int'(LOGN) - 1 - int'(s);
    au = ((int'(kk) >> bl) << (bl + 1)) | (int'(kk) & ((1 << bl) - 1));
    return IW'((1 << (int'(s) - int'(LC))) - 1 + (au >> (bl + 1)));
  endfunction

  // poly read by each lane
  logic [POLY_W-1:0] rd_poly_l [2];
  always_comb begin
    unique case (ci.op)
      OP_NTT, OP_INTT:   begin rd_poly_l[0] = ci.dst;  rd_poly_l[1] = ci.dst;  end
      OP_CADD, OP_CSUB,
      OP_SPLIT, OP_JOIN: begin rd_poly_l[0] = ci.src2; rd_poly_l[1] = ci.src1; end
      OP_CMUL, OP_CSCALE:begin rd_poly_l[0] = ci.src1; rd_poly_l[1] = ci.src2; end
      default:           begin rd_poly_l[0] = ci.src1; rd_poly_l[1] = ci.src1; end
    endcase
  end
  // poly written by each butterfly output (0 = t output, 1 = u output)
  logic [POLY_W-1:0] wr_poly_l [2];
  always_comb begin
    if (is_cw || ci.op == OP_AUTO || ci.op == OP_BCAST) begin
      wr_poly_l[0] = ci.dst; wr_poly_l[1] = ci.dst;
    end else begin
      wr_poly_l[0] = rd_poly_l[0]; wr_poly_l[1] = rd_poly_l[1];
    end
  end

  // ---------------- read requests ----------------------------------------
  logic          rq_valid [NREQ];
  logic [LC-1:0] rq_bank  [NREQ];
  logic          rq_port  [NREQ];
  logic [POLY_W+LBD-1:0] rq_pay [NREQ];
  logic [W-1:0]  rq_data  [NREQ];
  logic [LOGN-1:0] auto_j [NREQ];

  for (genvar g = 0; g < int'(NREQ); g++) begin : g_auto
    logic [LOGN-1:0] ai;
    assign ai = LOGN'((g / 2) * int'(BD) + int'(sp_k[0]) + (g % 2) * int'(BD / 2));
    auto_addr_gen #(.LOGN(LOGN)) u_aag (.i(ai), .galois(ci.galois[LOGN:0]), .j(auto_j[g]));
  end

  always_comb begin
    for (int r = 0; r < int'(NREQ); r++) begin
      automatic int   c    = r / 2;
      automatic int   lane = r % 2;
      automatic logic [TPW-1:0] tap = (lane == 0) ? dt : du;
      automatic loc_t l    = slot_loc(ci.op, sp_s[tap], sp_k[tap], c, lane);
      rq_valid[r] = sp_v[tap] && (is_bf || ci.op == OP_AUTO || (ci.op == OP_BCAST && is_src)) &&
                    !(ci.op == OP_CSCALE && lane == 1);
      if (ci.op == OP_AUTO) begin
        l.bank = LC'(auto_j[r] >> LBD);
        l.addr = LBD'(auto_j[r]);
      end
      rq_bank[r] = l.bank;
      rq_port[r] = l.port;
      rq_pay[r]  = {rd_poly_l[lane], l.addr};
    end
  end

  logic                  rb_valid [CORES][2];
  logic [POLY_W+LBD-1:0] rb_pay   [CORES][2];
  bus_switch_matrix #(.NREQ(NREQ), .NBANK(CORES), .PW(POLY_W + LBD), .DW(W)) u_rd_xbar (
    .clk, .rst, .req_valid(rq_valid), .req_bank(rq_bank), .req_port(rq_port),
    .req_payload(rq_pay), .bank_valid(rb_valid), .bank_payload(rb_pay),
    .bank_rdata(c_rd_data), .req_rdata(rq_data));

  always_comb begin
    for (int c = 0; c < int'(CORES); c++)
      for (int p = 0; p < 2; p++) begin
        c_rd_en[c][p] = rb_valid[c][p];
        {c_rd_poly[c][p], c_rd_addr[c][p]} = rb_pay[c][p];
      end
  end

  // ---------------- butterfly cores + twiddles -----------------------------
  logic             bf_ov_u [CORES], bf_ov_t [CORES];
  logic [W-1:0]     bf_u    [CORES], bf_t    [CORES];
  logic [TAG_W-1:0] bf_tu   [CORES], bf_tt   [CORES];

  bf_mode_e bf_mode;
  always_comb begin
    unique case (ci.op)
      OP_NTT, OP_SPLIT:   bf_mode = BF_DIT;
      OP_INTT, OP_JOIN:   bf_mode = BF_DIF;
      OP_CADD:            bf_mode = BF_ADD;
      OP_CSUB:            bf_mode = BF_SUB;
      default:            bf_mode = BF_MUL;
    endcase
  end

  for (genvar c = 0; c < int'(CORES); c++) begin : g_core
    logic         tw_valid;
    logic [W-1:0] tw;
    logic [W-1:0] w_in;
    loc_t         lt, lu;

    twiddle_gen #(.W(W), .LAT(LAT), .LOGN(LOGN), .DEPTH(TF_DEPTH), .SPARSE_Q0(SPARSE_Q0)) u_tw (
      .clk, .rst, .q, .mu,
      .cfg_tf_we(cfg_tf_we && cfg_tf_core == LC'(c)), .cfg_tf_dir, .cfg_tf_addr,
      .cfg_scl_we, .cfg_scl_ring, .cfg_scl_dir, .cfg_scl_stage, .cfg_data,
      .req_valid(sp_v[0] && (is_dit || is_dif)),
      .req_ext(ci.op inside {OP_SPLIT, OP_JOIN}),
      .req_dir(ci.op == OP_INTT),
      .req_idx(tf_index(sp_s[0], sp_k[0])),
      .req_ring(ci.ring), .req_stage(sp_s[0]),
      .ext_a(scalar[ci.sidx]), .ext_b(W'(1)),
      .w_valid(tw_valid), .w(tw));

    always_comb begin
      lt = slot_loc(ci.op, sp_s[bi], sp_k[bi], c, 0);
      lu = slot_loc(ci.op, sp_s[bi], sp_k[bi], c, 1);
      unique case (ci.op)
        OP_CMUL:   w_in = rq_data[2*c+1];
        OP_CSCALE: w_in = scalar[ci.sidx];
        default:   w_in = tw;
      endcase
    end

    butterfly_core #(.W(W), .LAT(LAT), .TAG_W(TAG_W), .SPARSE_Q0(SPARSE_Q0)) u_bf (
      .clk, .rst, .q, .mu,
      .in_valid(sp_v[bi] && is_bf), .mode(bf_mode),
      .in_u(rq_data[2*c+1]), .in_t(rq_data[2*c]), .in_w(w_in),
      .in_tag_u({lu.bank, lu.port, wr_poly_l[1], lu.addr}),
      .in_tag_t({lt.bank, lt.port, wr_poly_l[0], lt.addr}),
      .dly_u(rq_data[2*c+1]),
      .out_u_valid(bf_ov_u[c]), .out_u(bf_u[c]), .out_u_tag(bf_tu[c]),
      .out_t_valid(bf_ov_t[c]), .out_t(bf_t[c]), .out_t_tag(bf_tt[c]));

    a_twiddle_aligned: assert property (@(posedge clk) disable iff (rst)
      (sp_v[bi] && (is_dit || is_dif)) |-> tw_valid);
  end

  // ---------------- write requests -----------------------------------------
  logic          wq_valid [NREQ];
  logic [LC-1:0] wq_bank  [NREQ];
  logic          wq_port  [NREQ];
  logic [POLY_W+LBD+W-1:0] wq_pay [NREQ];

  always_comb begin
    for (int r = 0; r < int'(NREQ); r++) begin
      automatic int   c    = r / 2;
      automatic int   lane = r % 2;
      automatic loc_t l;
      if (state == S_RECV) begin
        l = slot_loc(OP_BCAST, '0, beats, c, lane);
        wq_valid[r] = rx_valid;
        wq_bank[r]  = l.bank; wq_port[r] = l.port;
        wq_pay[r]   = {ci.dst, l.addr, rx_data[c][lane]};
      end else if (ci.op == OP_AUTO) begin
        l = slot_loc(OP_AUTO, '0, sp_k[1], c, lane);
        wq_valid[r] = sp_v[1];
        wq_bank[r]  = l.bank; wq_port[r] = l.port;
        wq_pay[r]   = {ci.dst, l.addr, rq_data[r]};
      end else if (lane == 0) begin
        wq_valid[r] = bf_ov_t[c];
        {wq_bank[r], wq_port[r]} = bf_tt[c][TAG_W-1 -: LC+1];
        wq_pay[r]   = {bf_tt[c][POLY_W+LBD-1:0], bf_t[c]};
      end else begin
        wq_valid[r] = bf_ov_u[c];
        {wq_bank[r], wq_port[r]} = bf_tu[c][TAG_W-1 -: LC+1];
        wq_pay[r]   = {bf_tu[c][POLY_W+LBD-1:0], bf_u[c]};
      end
    end
  end

  logic                    wb_valid [CORES][2];
  logic [POLY_W+LBD+W-1:0] wb_pay   [CORES][2];
  logic [0:0]              wx_zero  [CORES][2];
  logic [0:0]              wx_unused [NREQ];
  always_comb
    for (int c = 0; c < int'(CORES); c++) begin wx_zero[c][0] = 1'b0; wx_zero[c][1] = 1'b0; end

  bus_switch_matrix #(.NREQ(NREQ), .NBANK(CORES), .PW(POLY_W + LBD + W), .DW(1)) u_wr_xbar (
    .clk, .rst, .req_valid(wq_valid), .req_bank(wq_bank), .req_port(wq_port),
    .req_payload(wq_pay), .bank_valid(wb_valid), .bank_payload(wb_pay),
    .bank_rdata(wx_zero), .req_rdata(wx_unused));

  always_comb begin
    for (int c = 0; c < int'(CORES); c++)
      for (int p = 0; p < 2; p++) begin
        c_wr_en[c][p] = wb_valid[c][p];
        {c_wr_poly[c][p], c_wr_addr[c][p], c_wr_data[c][p]} = wb_pay[c][p];
      end
  end

  // ---------------- broadcast transmit ----------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      tx_valid <= 1'b0;
      for (int c = 0; c < int'(CORES); c++) begin tx_data[c][0] <= '0; tx_data[c][1] <= '0; end
    end else begin
      tx_valid <= sp_v[1] && ci.op == OP_BCAST;
      for (int c = 0; c < int'(CORES); c++) begin
        tx_data[c][0] <= rq_data[2*c];
        tx_data[c][1] <= rq_data[2*c+1];
      end
    end
  end

  // ---------------- sequencer -----------------------------------------------
  assign busy = (state != S_IDLE);
  assign last_stage = (ci.op == OP_NTT)  ? (int'(stage) == int'(LOGN) - 1) :
                      (ci.op == OP_INTT) ? (stage == '0) : 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; ci <= '0; stage <= '0; k <= '0; nslots_m1 <= '0;
      gap_cnt <= '0; beats <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (instr_valid && is_main_op(instr.op)) begin
          ci    <= instr;
          k     <= '0;
          beats <= '0;
          stage <= (instr.op == OP_INTT) ? SW'(LOGN - 1) : '0;
          nslots_m1 <= (instr.op inside {OP_NTT, OP_INTT, OP_AUTO, OP_BCAST}) ?
                       LBD'(BD / 2 - 1) : LBD'(BD - 1);
          if (instr.op == OP_BCAST && instr.sidx != 4'(my_id)) state <= S_RECV;
          else                                               state <= S_RUN;
        end
        S_RUN: begin
          k <= k + 1'b1;
          if (k == nslots_m1) begin
            state   <= S_GAP;
            gap_cnt <= last_stage ? 8'(2 * LAT + 4) : 8'(LAT + 3);
          end
        end
        S_GAP: begin
          gap_cnt <= gap_cnt - 1'b1;
          if (gap_cnt == 8'd1) begin
            if (last_stage) state <= S_IDLE;
            else begin
              state <= S_RUN;
              k     <= '0;
              stage <= (ci.op == OP_INTT) ? stage - 1'b1 : stage + 1'b1;
            end
          end
        end
        S_RECV: if (rx_valid) begin
          beats <= beats + 1'b1;
          if (beats == LBD'(BD / 2 - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_instr_when_busy: assert property (@(posedge clk) disable iff (rst)
    (instr_valid && is_main_op(instr.op)) |-> !busy);
endmodule
