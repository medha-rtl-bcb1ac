// tb_rpau_dyadic: the dyadic core group on a reduced ring (N = 64, four
// lanes, multiplier latency 4) with the real polynomial memory. Loads
// random polynomials through the main memory ports, runs DADD, DSUB,
// DMUL, DMAC and DMACK and compares the results with a software model;
// for DMACK the key polynomial is rebuilt from a bit-serial Trivium
// model of each lane. Checks the busy time N/DYD+LAT+3 (plus 19 PRNG
// warm-up cycles for DMACK).
module tb_rpau_dyadic;
  import medha_pkg::*;
  import tb_math_pkg::*;
  localparam int W = 60, N = 64, CORES = 4, DYD = 4, LAT = 4;
  localparam int BD = N / CORES, LBD = $clog2(BD), LOGN = $clog2(N), SL = N / DYD;
  localparam u64 Q = 64'h0fffffffff2a0001;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [W-1:0] q;
  logic [W+7:0] mu;
  logic [63:0] seed [NUM_SCALAR];
  logic [6:0] qbits = 7'd60;
  logic instr_valid = 0, busy;
  instr_t instr;
  logic              m_rd_en [CORES][2], m_wr_en [CORES][2];
  logic [POLY_W-1:0] m_rd_poly [CORES][2], m_wr_poly [CORES][2];
  logic [LBD-1:0]    m_rd_addr [CORES][2], m_wr_addr [CORES][2];
  logic [W-1:0]      m_rd_data [CORES][2], m_wr_data [CORES][2];
  logic              d_rd_en [DYD][3], d_wr_en [DYD];
  logic [POLY_W-1:0] d_rd_poly [DYD][3], d_wr_poly [DYD];
  logic [LOGN-1:0]   d_rd_n [DYD][3], d_wr_n [DYD];
  logic [W-1:0]      d_rd_data [DYD][3], d_wr_data [DYD];
  int checks = 0, failures = 0;

  rpau_dyadic #(.W(W), .N(N), .DYD(DYD), .LAT(LAT)) dut (
    .clk, .rst, .q, .mu, .seed, .qbits, .instr_valid, .instr, .busy,
    .d_rd_en, .d_rd_poly, .d_rd_n, .d_rd_data, .d_wr_en, .d_wr_poly, .d_wr_n, .d_wr_data);
  rpau_memory #(.W(W), .N(N), .CORES(CORES), .DYD(DYD)) u_mem (.*);

  task automatic wr_poly(int p, const ref u64 a[]);
    for (int ad = 0; ad < BD; ad++) begin
      for (int c = 0; c < CORES; c++) begin
        m_wr_en[c][0] = 1; m_wr_poly[c][0] = POLY_W'(p); m_wr_addr[c][0] = LBD'(ad);
        m_wr_data[c][0] = W'(a[c*BD + ad]);
      end
      @(negedge clk);
    end
    for (int c = 0; c < CORES; c++) m_wr_en[c][0] = 0;
  endtask
  task automatic rd_poly(int p, ref u64 a[]);
    a = new[N];
    for (int ad = 0; ad < BD; ad++) begin
      for (int c = 0; c < CORES; c++) begin
        m_rd_en[c][0] = 1; m_rd_poly[c][0] = POLY_W'(p); m_rd_addr[c][0] = LBD'(ad);
      end
      @(negedge clk);
      for (int c = 0; c < CORES; c++) a[c*BD + ad] = u64'(m_rd_data[c][0]);
    end
    for (int c = 0; c < CORES; c++) m_rd_en[c][0] = 0;
  endtask
  task automatic exec(opcode_e op, int dst, int s1, int s2, int sidx, output int cyc);
    instr = '0; instr.op = op; instr.dst = POLY_W'(dst); instr.src1 = POLY_W'(s1);
    instr.src2 = POLY_W'(s2); instr.sidx = 4'(sidx);
    instr_valid = 1; @(negedge clk); instr_valid = 0;
    cyc = 0; while (busy) begin cyc++; @(negedge clk); end
  endtask

  logic [288:1] st;
  function automatic bit step();
    bit t1, t2, t3, z;
    t1 = st[66] ^ st[93]; t2 = st[162] ^ st[177]; t3 = st[243] ^ st[288];
    z = t1 ^ t2 ^ t3;
    t1 ^= (st[91] & st[92]) ^ st[171];
    t2 ^= (st[175] & st[176]) ^ st[264];
    t3 ^= (st[286] & st[287]) ^ st[69];
    st[93:1] = {st[92:1], t3}; st[177:94] = {st[176:94], t1}; st[288:178] = {st[287:178], t2};
    return z;
  endfunction

  initial begin
    #2ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    u64 a[], b[], c0[], r[], ksk[];
    int cyc, ok;
    q = W'(Q); mu = barrett_mu(Q);
    for (int i = 0; i < NUM_SCALAR; i++) seed[i] = {$urandom, $urandom};
    for (int cc = 0; cc < CORES; cc++) for (int p = 0; p < 2; p++) begin
      m_rd_en[cc][p] = 0; m_wr_en[cc][p] = 0; m_rd_poly[cc][p] = 0; m_wr_poly[cc][p] = 0;
      m_rd_addr[cc][p] = 0; m_wr_addr[cc][p] = 0; m_wr_data[cc][p] = 0;
    end
    instr = '0;
    a = new[N]; b = new[N]; c0 = new[N];
    for (int i = 0; i < N; i++) begin
      a[i] = {$urandom, $urandom} % Q; b[i] = {$urandom, $urandom} % Q; c0[i] = {$urandom, $urandom} % Q;
    end
    repeat (2) @(negedge clk); rst = 0;
    wr_poly(0, a); wr_poly(1, b); wr_poly(2, c0);
    exec(OP_DADD, 3, 0, 1, 0, cyc);
    checks++; if (cyc != SL + LAT + 3) begin failures++; $display("FAIL DADD cycles %0d", cyc); end
    rd_poly(3, r); ok = 0; for (int i = 0; i < N; i++) if (r[i] == addm(a[i], b[i], Q)) ok++;
    checks++; if (ok != N) failures++;
    exec(OP_DSUB, 3, 0, 1, 0, cyc);
    rd_poly(3, r); ok = 0; for (int i = 0; i < N; i++) if (r[i] == subm(a[i], b[i], Q)) ok++;
    checks++; if (ok != N) failures++;
    exec(OP_DMUL, 3, 0, 1, 0, cyc);
    rd_poly(3, r); ok = 0; for (int i = 0; i < N; i++) if (r[i] == mulm(a[i], b[i], Q)) ok++;
    checks++; if (ok != N) failures++;
    exec(OP_DMAC, 2, 0, 1, 0, cyc);
    rd_poly(2, r); ok = 0; for (int i = 0; i < N; i++) if (r[i] == addm(c0[i], mulm(a[i], b[i], Q), Q)) ok++;
    checks++; if (ok != N) begin failures++; $display("FAIL DMAC %0d", ok); end
    // DMACK: dst(3) = dst + a * KSK0(seed[5], key slot 14)
    wr_poly(3, c0);
    exec(OP_DMACK, 3, 0, 14, 5, cyc);
    checks++; if (cyc != 19 + SL + LAT + 3) begin failures++; $display("FAIL DMACK cycles %0d", cyc); end
    ksk = new[N];
    for (int l = 0; l < DYD; l++) begin
      st = '0; st[80:1] = {16'b0, seed[5]}; st[173:94] = 80'({16'd14, 4'(l)}); st[288:286] = 3'b111;
      for (int i = 0; i < 1152; i++) void'(step());
      for (int k = 0; k < SL; k++) begin
        logic [63:0] wd;
        for (int bb = 0; bb < 64; bb++) wd[bb] = step();
        wd = {4'b0, wd[59:0]};
        if (wd >= Q) wd = wd - Q;
        ksk[l*SL + k] = wd;
      end
    end
    rd_poly(3, r); ok = 0; for (int i = 0; i < N; i++) if (r[i] == addm(c0[i], mulm(a[i], ksk[i], Q), Q)) ok++;
    checks++; if (ok != N) begin failures++; $display("FAIL DMACK %0d", ok); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
