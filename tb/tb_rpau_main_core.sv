// tb_rpau_main_core: self-checking test of the RPAU main core group on a
// reduced ring (N = 64, 4 cores, multiplier latency 4, 60-bit prime).
// The core is connected to the real memory (rpau_memory) through the
// memory access controller; polynomials are loaded and read back over
// the host port. Checks:
//   - forward NTT (ring x^N+1) against direct evaluation at
//     psi^(2*brv(i)+1), and its busy time LOGN*(BD/2+LAT+3)+LAT+1
//   - INTT round trip for ring x^N+1 and for ring x^N - zeta^N
//   - coefficient-wise add/sub/mul/scale against a software model and
//     their busy time BD+2*LAT+4
//   - split/join of a degree-2N polynomial with w = zeta^N
//   - automorphism: AUTO(NTT(a)) == NTT(a(x^k)) for two Galois elements
//   - broadcast transmit (beats carry src1) and receive (beats land in dst)
module tb_rpau_main_core;
  import medha_pkg::*;
  import tb_math_pkg::*;

  localparam int N = 64, CORES = 4, LAT = 4, W = 60;
  localparam int BD = N / CORES, LBD = $clog2(BD), LOGN = $clog2(N), LC = $clog2(CORES);
  localparam int TF_DEPTH = BD + LC - 1, IW = $clog2(TF_DEPTH), SW = $clog2(LOGN);
  localparam u64 Q = 64'h0ffffffffffc0001;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  // ---------------- DUT and memory -----------------------------------------
  logic [W-1:0]    q;
  logic [W+7:0]    mu;
  logic [W-1:0]    scalar [NUM_SCALAR];
  logic            cfg_tf_we = 0, cfg_tf_dir = 0, cfg_scl_we = 0, cfg_scl_dir = 0;
  logic [LC-1:0]   cfg_tf_core = 0;
  logic [IW-1:0]   cfg_tf_addr = 0;
  logic [1:0]      cfg_scl_ring = 0;
  logic [SW-1:0]   cfg_scl_stage = 0;
  logic [W-1:0]    cfg_data = 0;
  logic            instr_valid = 0, busy;
  instr_t          instr;
  logic [3:0]      my_id = 4'd0;
  logic              c_rd_en [CORES][2], c_wr_en [CORES][2], m_rd_en [CORES][2], m_wr_en [CORES][2];
  logic [POLY_W-1:0] c_rd_poly [CORES][2], c_wr_poly [CORES][2], m_rd_poly [CORES][2], m_wr_poly [CORES][2];
  logic [LBD-1:0]    c_rd_addr [CORES][2], c_wr_addr [CORES][2], m_rd_addr [CORES][2], m_wr_addr [CORES][2];
  logic [W-1:0]      c_rd_data [CORES][2], c_wr_data [CORES][2], m_rd_data [CORES][2], m_wr_data [CORES][2];
  logic              tx_valid, rx_valid = 0;
  logic [W-1:0]      tx_data [CORES][2], rx_data [CORES][2];
  logic              host_en = 0, host_we = 0;
  logic [POLY_W-1:0] host_poly = 0;
  logic [LBD-1:0]    host_addr = 0;
  logic [W-1:0]      host_wdata [CORES], host_rdata [CORES];
  logic              d_rd_en [1][3], d_wr_en [1];
  logic [POLY_W-1:0] d_rd_poly [1][3], d_wr_poly [1];
  logic [LOGN-1:0]   d_rd_n [1][3], d_wr_n [1];
  logic [W-1:0]      d_rd_data [1][3], d_wr_data [1];

  initial begin
    for (int p = 0; p < 3; p++) begin d_rd_en[0][p] = 0; d_rd_poly[0][p] = 0; d_rd_n[0][p] = 0; end
    d_wr_en[0] = 0; d_wr_poly[0] = 0; d_wr_n[0] = 0; d_wr_data[0] = 0;
    for (int c = 0; c < CORES; c++) begin
      host_wdata[c] = 0; rx_data[c][0] = 0; rx_data[c][1] = 0;
    end
    for (int i = 0; i < NUM_SCALAR; i++) scalar[i] = 0;
    instr = '0;
  end

  rpau_main_core #(.W(W), .N(N), .CORES(CORES), .LAT(LAT)) dut (
    .clk, .rst, .q, .mu, .scalar, .my_id,
    .cfg_tf_we, .cfg_tf_core, .cfg_tf_dir, .cfg_tf_addr,
    .cfg_scl_we, .cfg_scl_ring, .cfg_scl_dir, .cfg_scl_stage, .cfg_data,
    .instr_valid, .instr, .busy,
    .c_rd_en, .c_rd_poly, .c_rd_addr, .c_rd_data,
    .c_wr_en, .c_wr_poly, .c_wr_addr, .c_wr_data,
    .tx_valid, .tx_data, .rx_valid, .rx_data);

  mem_access_ctrl #(.W(W), .N(N), .CORES(CORES), .DYD(1)) u_mac (
    .clk, .rst, .host_en, .host_we, .host_poly, .host_addr, .host_wdata, .host_rdata,
    .core_busy(busy),
    .c_rd_en, .c_rd_poly, .c_rd_addr, .c_rd_data, .c_wr_en, .c_wr_poly, .c_wr_addr, .c_wr_data,
    .d_wr_en, .d_wr_poly, .d_wr_n,
    .m_rd_en, .m_rd_poly, .m_rd_addr, .m_rd_data, .m_wr_en, .m_wr_poly, .m_wr_addr, .m_wr_data);

  rpau_memory #(.W(W), .N(N), .CORES(CORES), .DYD(1)) u_mem (
    .clk, .m_rd_en, .m_rd_poly, .m_rd_addr, .m_rd_data, .m_wr_en, .m_wr_poly, .m_wr_addr, .m_wr_data,
    .d_rd_en, .d_rd_poly, .d_rd_n, .d_rd_data, .d_wr_en, .d_wr_poly, .d_wr_n, .d_wr_data);

  // ---------------- helpers -------------------------------------------------------
  task automatic host_write(int poly, const ref u64 a[]);
    @(negedge clk);
    host_en = 1; host_we = 1; host_poly = POLY_W'(poly);
    for (int ad = 0; ad < BD; ad++) begin
      host_addr = LBD'(ad);
      for (int c = 0; c < CORES; c++) host_wdata[c] = W'(a[c*BD + ad]);
      @(negedge clk);
    end
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(int poly, ref u64 a[]);
    a = new[N];
    @(negedge clk);
    host_en = 1; host_we = 0; host_poly = POLY_W'(poly);
    for (int ad = 0; ad < BD; ad++) begin
      host_addr = LBD'(ad);
      @(negedge clk);
      for (int c = 0; c < CORES; c++) a[c*BD + ad] = u64'(host_rdata[c]);
    end
    host_en = 0;
  endtask

  task automatic exec(opcode_e op, int dst, int s1, int s2, int ring, int sidx, int gal, output int cyc);
    @(negedge clk);
    instr = '0;
    instr.op = op; instr.dst = POLY_W'(dst); instr.src1 = POLY_W'(s1); instr.src2 = POLY_W'(s2);
    instr.ring = 2'(ring); instr.sidx = 4'(sidx); instr.galois = 16'(gal); instr.mask = 16'h1;
    instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    cyc = 0;
    while (busy) begin cyc++; @(negedge clk); end
  endtask

  u64 zeta;   // primitive 4N-th root
  task automatic load_twiddles();
    for (int c = 0; c < CORES; c++) begin
      for (int s = 0; s < LOGN; s++) begin
        int cnt, base, g, idx, e;
        if (s < LC) cnt = 1; else cnt = 1 << (s - LC);
        for (int go = 0; go < cnt; go++) begin
          if (s < LC) begin g = c >> (LC - s); idx = BD - 1 + s; end
          else begin g = c * cnt + go; idx = cnt - 1 + go; end
          e = 2 * brv((1 << s) + g, LOGN) - N / (2 << s);
          for (int d = 0; d < 2; d++) begin
            @(negedge clk);
            cfg_tf_we = 1; cfg_tf_core = LC'(c); cfg_tf_dir = d[0]; cfg_tf_addr = IW'(idx);
            cfg_data = W'(zpow(zeta, d ? -e : e, 4 * N, Q));
          end
        end
      end
    end
    @(negedge clk); cfg_tf_we = 0;
    for (int r = 0; r < 3; r++)
      for (int d = 0; d < 2; d++)
        for (int s = 0; s < LOGN; s++) begin
          int e;
          e = (r == 0) ? 0 : (r == 1) ? N / (1 << s) : N / (2 << s);
          @(negedge clk);
          cfg_scl_we = 1; cfg_scl_ring = 2'(r); cfg_scl_dir = d[0]; cfg_scl_stage = SW'(s);
          cfg_data = W'(zpow(zeta, d ? -e : e, 4 * N, Q));
        end
    @(negedge clk); cfg_scl_we = 0;
  endtask

  function automatic void rand_poly(ref u64 a[]);
    a = new[N];
    for (int i = 0; i < N; i++) a[i] = {$urandom, $urandom} % Q;
  endfunction

  // ---------------- watchdog --------------------------------------------------------
  initial begin
    #5ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ---------------- test ----------------------------------------------------------------
  initial begin
    u64 a[], b[], r[], e[], ntt_a[], ntt_s[];
    int cyc, okc;
    u64 psi, w;
    q = W'(Q); mu = barrett_mu(Q);
    zeta = prim_root(Q, 4 * N);
    psi  = mulm(zeta, zeta, Q);
    repeat (3) @(negedge clk);
    rst = 0;
    load_twiddles();

    // 1. forward NTT, ring x^N+1
    rand_poly(a);
    host_write(0, a);
    exec(OP_NTT, 0, 0, 0, 2, 0, 0, cyc);
    check(cyc == LOGN * (BD / 2 + LAT + 3) + LAT + 1, $sformatf("NTT cycles %0d", cyc));
    host_read(0, r);
    okc = 0;
    for (int i = 0; i < N; i++)
      if (r[i] == eval_poly(a, powm(psi, u64'(2 * brv(i, LOGN) + 1), Q), Q)) okc++;
    check(okc == N, $sformatf("NTT values %0d/%0d correct", okc, N));
    ntt_a = r;

    // 2. INTT round trip, ring x^N+1
    exec(OP_INTT, 0, 0, 0, 2, 0, 0, cyc);
    check(cyc == LOGN * (BD / 2 + LAT + 3) + LAT + 1, $sformatf("INTT cycles %0d", cyc));
    host_read(0, r);
    check(r == a, "INTT(NTT(a)) == a, ring 2");

    // 3. ring x^N - zeta^N: NTT slot i = a(zeta * psi^brv'), round trip
    rand_poly(b);
    host_write(1, b);
    exec(OP_NTT, 1, 0, 0, 0, 0, 0, cyc);
    host_read(1, r);
    okc = 0;
    for (int i = 0; i < N; i++)
      if (mulm(powm(r[i], 1, Q), 1, Q) == eval_poly(b, powm(zeta, u64'(4 * brv(i, LOGN) + 1), Q), Q)) okc++;
    check(okc == N, $sformatf("NTT ring0 values %0d/%0d correct", okc, N));
    exec(OP_INTT, 1, 0, 0, 0, 0, 0, cyc);
    host_read(1, r);
    check(r == b, "INTT(NTT(b)) == b, ring 0");

    // 4. coefficient-wise operations
    scalar[3] = W'(64'd12345678901);
    exec(OP_CADD, 2, 0, 1, 0, 0, 0, cyc);
    check(cyc == BD + 2 * LAT + 4, $sformatf("CADD cycles %0d", cyc));
    host_read(2, r);
    okc = 0; for (int i = 0; i < N; i++) if (r[i] == addm(a[i], b[i], Q)) okc++;
    check(okc == N, "CADD");
    exec(OP_CSUB, 2, 0, 1, 0, 0, 0, cyc);
    host_read(2, r);
    okc = 0; for (int i = 0; i < N; i++) if (r[i] == subm(a[i], b[i], Q)) okc++;
    check(okc == N, "CSUB");
    exec(OP_CMUL, 2, 0, 1, 0, 0, 0, cyc);
    check(cyc == BD + 2 * LAT + 4, $sformatf("CMUL cycles %0d", cyc));
    host_read(2, r);
    okc = 0; for (int i = 0; i < N; i++) if (r[i] == mulm(a[i], b[i], Q)) okc++;
    check(okc == N, "CMUL");
    exec(OP_CSCALE, 2, 0, 0, 0, 3, 0, cyc);
    host_read(2, r);
    okc = 0; for (int i = 0; i < N; i++) if (r[i] == mulm(a[i], 64'd12345678901, Q)) okc++;
    check(okc == N, "CSCALE");

    // 5. split / join of a degree-2N polynomial (lo = a in 0, hi = b in 1)
    w = zpow(zeta, N, 4 * N, Q);
    scalar[1] = W'(w);
    scalar[2] = W'(invm(w, Q));
    exec(OP_SPLIT, 0, 0, 1, 0, 1, 0, cyc);
    check(cyc == BD + 2 * LAT + 4, $sformatf("SPLIT cycles %0d", cyc));
    host_read(0, r); host_read(1, e);
    okc = 0;
    for (int i = 0; i < N; i++) begin
      if (r[i] == addm(a[i], mulm(w, b[i], Q), Q)) okc++;
      if (e[i] == subm(a[i], mulm(w, b[i], Q), Q)) okc++;
    end
    check(okc == 2 * N, "SPLIT");
    exec(OP_JOIN, 0, 0, 1, 0, 2, 0, cyc);
    host_read(0, r); host_read(1, e);
    check(r == a && e == b, "JOIN restores");

    // 6. automorphism
    for (int t = 0; t < 2; t++) begin
      int k;
      u64 s[];
      k = (t == 0) ? 5 : 2 * N - 1;
      s = new[N];
      for (int i = 0; i < N; i++) s[i] = 0;
      for (int i = 0; i < N; i++) begin
        int ex; ex = (i * k) % (2 * N);
        if (ex < N) s[ex] = addm(s[ex], a[i], Q);
        else        s[ex - N] = subm(s[ex - N], a[i], Q);
      end
      host_write(3, ntt_a);
      host_write(4, s);
      exec(OP_NTT, 4, 0, 0, 2, 0, 0, cyc);
      host_read(4, ntt_s);
      exec(OP_AUTO, 5, 3, 0, 0, 0, k, cyc);
      check(cyc == BD / 2 + 2 * LAT + 4, $sformatf("AUTO cycles %0d", cyc));
      host_read(5, r);
      check(r == ntt_s, $sformatf("AUTO k=%0d", k));
    end

    // 7. broadcast transmit (this core is RPAU 0)
    fork
      exec(OP_BCAST, 6, 0, 0, 0, 0, 0, cyc);
      begin
        int beat; beat = 0; okc = 0;
        repeat (BD + 4 * LAT) begin
          @(posedge clk); #1;
          if (tx_valid) begin
            for (int c = 0; c < CORES; c++)
              for (int p = 0; p < 2; p++)
                if (u64'(tx_data[c][p]) == a[c*BD + 2*beat + p]) okc++;
            beat++;
          end
        end
        check(beat == BD / 2 && okc == N, $sformatf("BCAST tx beats=%0d ok=%0d", beat, okc));
      end
    join
    // broadcast receive (source is RPAU 2)
    rand_poly(e);
    fork
      exec(OP_BCAST, 7, 0, 0, 0, 2, 0, cyc);
      begin
        repeat (3) @(negedge clk);
        for (int beat = 0; beat < BD / 2; beat++) begin
          rx_valid = 1;
          for (int c = 0; c < CORES; c++)
            for (int p = 0; p < 2; p++) rx_data[c][p] = W'(e[c*BD + 2*beat + p]);
          @(negedge clk);
          rx_valid = 0;
          if (beat % 3 == 1) @(negedge clk);
        end
      end
    join
    host_read(7, r);
    check(r == e, "BCAST rx");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
