// tb_medha_top: end-to-end test of the accelerator on a reduced
// configuration (N = 64, 4 cores, 4 dyadic lanes, 3 RPAUs, multiplier
// latency 4). RPAU 0 uses the sparse prime q0, RPAUs 1 and 2 other
// 60-bit primes. The host loads twiddles, scalars, seeds and
// polynomials, writes two programs and starts them:
//   controller 0 (main groups): NTT, CMUL, INTT, BCAST (RPAU 1 sends),
//     SPLIT, AUTO, SYNC, SYNCC, END
//   controller 1 (dyadic groups): DMUL, DMACK, DADD (RPAU 2 only),
//     SYNCC, DSUB on the broadcast result, SYNC, END
// Every result polynomial of every RPAU is read back and compared with a
// software model. The test also counts the mechanisms it is meant to
// exercise and fails if one never happened: main/dyadic overlap, issue
// stalls on both controllers, broadcast beats received, controller
// rendezvous (SYNCC), PRNG warm-up, automorphism and split cycles; and
// checks that the run's cycle count covers the sum of the main-group
// instruction times.
module tb_medha_top;
  import medha_pkg::*;
  import tb_math_pkg::*;
  localparam int W = 60, N = 64, CORES = 4, DYD = 4, NR = 3, LAT = 4;
  localparam int BD = N / CORES, LBD = $clog2(BD), LOGN = $clog2(N), LC = $clog2(CORES);
  localparam int TF_DEPTH = BD + LC - 1, IW = $clog2(TF_DEPTH), SW = $clog2(LOGN), SL = N / DYD;
  localparam int AW = 10;
  u64 QS [NR] = '{64'h0800000002300001, 64'h0ffffffffffc0001, 64'h0fffffffff840001};

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic imem_we = 0, imem_sel = 0, start = 0, done;
  logic [AW-1:0] imem_addr = 0;
  logic [INSTR_W-1:0] imem_wdata = 0;
  logic [31:0] cycle_count, stall_count0, stall_count1, syncc_count;
  logic cfg_we = 0;
  logic [3:0] cfg_rpau = 0, host_rpau = 0;
  logic [2:0] cfg_sel = 0;
  logic [15:0] cfg_addr = 0;
  logic [63:0] cfg_data = 0;
  logic host_en = 0, host_we = 0;
  logic [POLY_W-1:0] host_poly = 0;
  logic [LBD-1:0] host_addr = 0;
  logic [CORES*W-1:0] host_wdata = 0, host_rdata;
  logic [NR-1:0] m_busy, d_busy;
  int checks = 0, failures = 0;

  medha_top #(.W(W), .N(N), .CORES(CORES), .DYD(DYD), .NUM_RPAU(NR), .LAT(LAT)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- host helpers ------------------------------------------------
  task automatic cfg(int r, cfg_sel_e s, int a, u64 d);
    @(negedge clk);
    cfg_we = 1; cfg_rpau = 4'(r); cfg_sel = 3'(s); cfg_addr = 16'(a); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask
  task automatic host_write(int r, int poly, input u64 a[]);
    @(negedge clk);
    host_en = 1; host_we = 1; host_rpau = 4'(r); host_poly = POLY_W'(poly);
    for (int ad = 0; ad < BD; ad++) begin
      host_addr = LBD'(ad);
      for (int c = 0; c < CORES; c++) host_wdata[c*W +: W] = W'(a[c*BD + ad]);
      @(negedge clk);
    end
    host_en = 0; host_we = 0;
  endtask
  task automatic host_read(int r, int poly, ref u64 a[]);
    a = new[N];
    @(negedge clk);
    host_en = 1; host_we = 0; host_rpau = 4'(r); host_poly = POLY_W'(poly);
    for (int ad = 0; ad < BD; ad++) begin
      host_addr = LBD'(ad);
      @(negedge clk);
      for (int c = 0; c < CORES; c++) a[c*BD + ad] = u64'(host_rdata[c*W +: W]);
    end
    host_en = 0;
  endtask
  function automatic instr_t mk(opcode_e op, int mask, int dst, int s1, int s2, int ring, int sidx, int gal);
    instr_t x;
    x = '0; x.op = op; x.mask = 16'(mask); x.dst = POLY_W'(dst); x.src1 = POLY_W'(s1);
    x.src2 = POLY_W'(s2); x.ring = 2'(ring); x.sidx = 4'(sidx); x.galois = 16'(gal);
    return x;
  endfunction
  task automatic load_prog(int sel, instr_t p[]);
    foreach (p[i]) begin
      @(negedge clk);
      imem_we = 1; imem_sel = sel[0]; imem_addr = AW'(i); imem_wdata = p[i];
    end
    @(negedge clk); imem_we = 0;
  endtask
  task automatic load_twiddles(int r);
    u64 qq, z;
    qq = QS[r]; z = prim_root(qq, 4 * N);
    cfg(r, CFG_Q, 0, qq); cfg(r, CFG_MU, 0, 64'(barrett_mu(qq))); cfg(r, CFG_QBITS, 0, 60);
    for (int c = 0; c < CORES; c++)
      for (int s = 0; s < LOGN; s++) begin
        int cnt, g, idx, e;
        cnt = (s < LC) ? 1 : 1 << (s - LC);
        for (int go = 0; go < cnt; go++) begin
          if (s < LC) begin g = c >> (LC - s); idx = BD - 1 + s; end
          else begin g = c * cnt + go; idx = cnt - 1 + go; end
          e = 2 * brv((1 << s) + g, LOGN) - N / (2 << s);
          for (int d = 0; d < 2; d++)
            cfg(r, CFG_TF, (c << (IW + 1)) | (d << IW) | idx, zpow(z, d ? -e : e, 4 * N, qq));
        end
      end
    for (int rg = 0; rg < 3; rg++)
      for (int d = 0; d < 2; d++)
        for (int s = 0; s < LOGN; s++) begin
          int e;
          e = (rg == 0) ? 0 : (rg == 1) ? N / (1 << s) : N / (2 << s);
          cfg(r, CFG_TFSCL, (rg << (SW + 1)) | (d << SW) | s, zpow(z, d ? -e : e, 4 * N, qq));
        end
  endtask

  // ---------------- mechanism counters ----------------------------------------------
  int n_overlap = 0, n_bcast_rx = 0, n_warm = 0, n_auto = 0, n_split = 0;
  logic rx_any;
  assign rx_any = dut.g_rpau[0].u_rpau.rx_valid || dut.g_rpau[2].u_rpau.rx_valid;
  always @(posedge clk) if (!rst) begin
    if (|m_busy && |d_busy) n_overlap++;
    if (dut.g_rpau[0].u_rpau.rx_valid) n_bcast_rx++;
    if (dut.g_rpau[2].u_rpau.rx_valid) n_bcast_rx++;
    if (dut.g_rpau[0].u_rpau.u_dyd.state == 2'd1) n_warm++;
    if (m_busy[1] && dut.g_rpau[1].u_rpau.u_main.ci.op == OP_AUTO) n_auto++;
    if (m_busy[1] && dut.g_rpau[1].u_rpau.u_main.ci.op == OP_SPLIT) n_split++;
  end

  initial begin
    #3ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  // ---------------- test ------------------------------------------------------------------
  initial begin
    u64 a [NR][], b [NR][], c [NR][], z0 [NR][], s4 [NR][], s5 [NR][];
    u64 seed5;
    u64 r[], e[];
    instr_t p0[], p1[];
    int ok, main_sum;
    repeat (3) @(negedge clk);
    rst = 0;
    seed5 = {$urandom, $urandom};
    for (int rr = 0; rr < NR; rr++) begin
      u64 qq, zz;
      qq = QS[rr]; zz = prim_root(qq, 4 * N);
      load_twiddles(rr);
      cfg(rr, CFG_SCALAR, 1, zpow(zz, N, 4 * N, qq));
      cfg(rr, CFG_SEED, 0, seed5);
      a[rr] = new[N]; b[rr] = new[N]; c[rr] = new[N]; z0[rr] = new[N]; s4[rr] = new[N]; s5[rr] = new[N];
      for (int i = 0; i < N; i++) begin
        a[rr][i] = {$urandom, $urandom} % qq; b[rr][i] = {$urandom, $urandom} % qq;
        c[rr][i] = {$urandom, $urandom} % qq; z0[rr][i] = 0;
        s4[rr][i] = {$urandom, $urandom} % qq; s5[rr][i] = {$urandom, $urandom} % qq;
      end
      host_write(rr, 0, a[rr]); host_write(rr, 1, b[rr]); host_write(rr, 2, c[rr]);
      host_write(rr, 4, s4[rr]); host_write(rr, 5, s5[rr]);
      host_write(rr, 9, z0[rr]); host_write(rr, 11, c[rr]);
    end
    p0 = new[9];
    p0[0] = mk(OP_NTT,   7, 0, 0, 0, 2, 0, 0);
    p0[1] = mk(OP_CMUL,  7, 3, 0, 1, 0, 0, 0);
    p0[2] = mk(OP_INTT,  7, 0, 0, 0, 2, 0, 0);
    p0[3] = mk(OP_BCAST, 7, 9, 2, 0, 0, 1, 0);
    p0[4] = mk(OP_SPLIT, 7, 0, 4, 5, 0, 1, 0);
    p0[5] = mk(OP_AUTO,  7, 6, 0, 0, 0, 0, 5);
    p0[6] = mk(OP_SYNC,  7, 0, 0, 0, 0, 0, 0);
    p0[7] = mk(OP_SYNCC, 0, 0, 0, 0, 0, 0, 0);
    p0[8] = mk(OP_END,   0, 0, 0, 0, 0, 0, 0);
    p1 = new[7];
    p1[0] = mk(OP_DMUL,  7, 10, 1, 2, 0, 0, 0);
    p1[1] = mk(OP_DMACK, 7, 11, 1, 14, 0, 0, 0);
    p1[2] = mk(OP_DADD,  4, 12, 1, 2, 0, 0, 0);
    p1[3] = mk(OP_SYNCC, 0, 0, 0, 0, 0, 0, 0);
    p1[4] = mk(OP_DSUB,  7, 13, 9, 2, 0, 0, 0);
    p1[5] = mk(OP_SYNC,  7, 0, 0, 0, 0, 0, 0);
    p1[6] = mk(OP_END,   0, 0, 0, 0, 0, 0, 0);
    load_prog(0, p0);
    load_prog(1, p1);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    while (!done) @(negedge clk);
    $display("run: %0d cycles, stalls %0d/%0d", cycle_count, stall_count0, stall_count1);

    // results
    for (int rr = 0; rr < NR; rr++) begin
      u64 qq, zz, psi, w;
      u64 ka[];
      qq = QS[rr]; zz = prim_root(qq, 4 * N); psi = mulm(zz, zz, qq); w = zpow(zz, N, 4 * N, qq);
      host_read(rr, 0, r); check(r == a[rr], $sformatf("RPAU%0d NTT/INTT round trip", rr));
      host_read(rr, 3, r); ok = 0;
      for (int i = 0; i < N; i++)
        if (r[i] == mulm(eval_poly(a[rr], powm(psi, u64'(2 * brv(i, LOGN) + 1), qq), qq), b[rr][i], qq)) ok++;
      check(ok == N, $sformatf("RPAU%0d NTT then CMUL %0d/%0d", rr, ok, N));
      host_read(rr, 9, r); ok = 0;
      for (int i = 0; i < N; i++) if (r[i] == ((rr == 1) ? 0 : c[1][i])) ok++;
      check(ok == N, $sformatf("RPAU%0d broadcast", rr));
      host_read(rr, 4, r); host_read(rr, 5, e); ok = 0;
      for (int i = 0; i < N; i++) begin
        if (r[i] == addm(s4[rr][i], mulm(w, s5[rr][i], qq), qq)) ok++;
        if (e[i] == subm(s4[rr][i], mulm(w, s5[rr][i], qq), qq)) ok++;
      end
      check(ok == 2 * N, $sformatf("RPAU%0d split", rr));
      host_read(rr, 6, r); ok = 0;
      for (int i = 0; i < N; i++) begin
        int j;
        j = brv((((2 * brv(i, LOGN) + 1) * 5) % (2 * N) - 1) / 2, LOGN);
        if (r[i] == a[rr][j]) ok++;
      end
      check(ok == N, $sformatf("RPAU%0d automorphism", rr));
      host_read(rr, 10, r); ok = 0;
      for (int i = 0; i < N; i++) if (r[i] == mulm(b[rr][i], c[rr][i], qq)) ok++;
      check(ok == N, $sformatf("RPAU%0d DMUL", rr));
      // DMACK: 11 = c + b * KSK0; the key is checked to be in range and
      // the same on every RPAU up to the reduction (same seed and stream)
      host_read(rr, 11, r); ok = 0;
      for (int i = 0; i < N; i++) begin
        u64 k;
        k = mulm(subm(r[i], c[rr][i], qq), invm(b[rr][i], qq), qq);
        if (k < (64'd1 << 60)) ok++;
      end
      check(ok == N, $sformatf("RPAU%0d DMACK", rr));
      host_read(rr, 12, r); ok = 0;
      if (rr == 2) for (int i = 0; i < N; i++) if (r[i] == addm(b[rr][i], c[rr][i], qq)) ok++;
      check(rr != 2 || ok == N, $sformatf("RPAU%0d DADD (masked)", rr));
      host_read(rr, 13, r); ok = 0;
      for (int i = 0; i < N; i++) if (r[i] == subm((rr == 1) ? 0 : c[1][i], c[rr][i], qq)) ok++;
      check(ok == N, $sformatf("RPAU%0d DSUB after rendezvous", rr));
    end
    // the same KSK0 stream on RPAUs 1 and 2 (equal keys below both moduli)
    begin
      u64 r1[], r2[];
      host_read(1, 11, r1); host_read(2, 11, r2); ok = 0;
      for (int i = 0; i < N; i++) begin
        u64 k1, k2;
        k1 = mulm(subm(r1[i], c[1][i], QS[1]), invm(b[1][i], QS[1]), QS[1]);
        k2 = mulm(subm(r2[i], c[2][i], QS[2]), invm(b[2][i], QS[2]), QS[2]);
        if (k1 == k2 || k1 >= QS[2] || k2 >= QS[1]) ok++;
      end
      check(ok == N, "KSK0 stream identical across RPAUs");
    end

    // mechanisms
    check(n_overlap > 0, $sformatf("main/dyadic overlap cycles %0d", n_overlap));
    check(stall_count0 > 0, "controller 0 stalls");
    check(stall_count1 > 0, "controller 1 stalls");
    check(n_bcast_rx == 2 * BD / 2, $sformatf("broadcast beats received %0d", n_bcast_rx));
    check(syncc_count == 1, "SYNCC rendezvous");
    check(n_warm > 0, "PRNG warm-up");
    check(n_auto > 0 && n_split > 0, "automorphism and split ran");
    main_sum = 2 * (LOGN * (BD / 2 + LAT + 3) + LAT + 1) + 4 * (BD + 2 * LAT + 4) / 2;
    check(cycle_count > main_sum && cycle_count < 4 * main_sum,
          $sformatf("cycle count %0d vs main-group work %0d", cycle_count, main_sum));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
