// tb_medha_top_full: the accelerator at its full size (N = 2^14, 16
// cores, 4 dyadic lanes, 10 RPAUs, multiplier latency 20; no parameter
// overrides). RPAU 0 (sparse prime q0) and RPAU 1 get twiddle tables and
// random polynomials. Controller 0 runs a forward NTT on both while
// controller 1 runs a dyadic multiplication on both, then an inverse NTT.
// Checks: NTT output slots against direct polynomial evaluation (a
// sample of slots), the DMUL result, the INTT round trip, and the cycle
// counts — the NTT program takes LOGN*(BD/2+LAT+3)+LAT+1 = 7511 busy
// cycles (within 5 % of the published ~7200) and the dyadic operation
// N/4+LAT+3 = 4119 (published ~4096) and overlaps the NTT.
module tb_medha_top_full;
  import medha_pkg::*;
  import tb_math_pkg::*;
  localparam int W = W_DEF, N = N_DEF, CORES = CORES_DEF, NR = NUM_RPAU_DEF, LAT = MUL_LAT_DEF;
  localparam int BD = N / CORES, LBD = $clog2(BD), LOGN = $clog2(N), LC = $clog2(CORES);
  localparam int TF_DEPTH = BD + LC - 1, IW = $clog2(TF_DEPTH), SW = $clog2(LOGN);
  localparam int AW = 10;
  u64 QS [2] = '{64'h0800000002300001, 64'h0ffffffffffc0001};

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

  medha_top dut (.*);

  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic cfg1(int r, cfg_sel_e s, int a, u64 d);   // one word per cycle
    cfg_we = 1; cfg_rpau = 4'(r); cfg_sel = 3'(s); cfg_addr = 16'(a); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask
  task automatic host_write(int r, int poly, input u64 a[]);
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
    host_en = 1; host_we = 0; host_rpau = 4'(r); host_poly = POLY_W'(poly);
    for (int ad = 0; ad < BD; ad++) begin
      host_addr = LBD'(ad);
      @(negedge clk);
      for (int c = 0; c < CORES; c++) a[c*BD + ad] = u64'(host_rdata[c*W +: W]);
    end
    host_en = 0;
  endtask
  function automatic instr_t mk(opcode_e op, int mask, int dst, int s1, int s2, int ring);
    instr_t x; x = '0; x.op = op; x.mask = 16'(mask); x.dst = POLY_W'(dst); x.src1 = POLY_W'(s1);
    x.src2 = POLY_W'(s2); x.ring = 2'(ring); return x;
  endfunction
  task automatic load_prog(int sel, instr_t p[]);
    foreach (p[i]) begin
      imem_we = 1; imem_sel = sel[0]; imem_addr = AW'(i); imem_wdata = p[i];
      @(negedge clk);
    end
    imem_we = 0;
  endtask
  task automatic run(output int cyc);
    start = 1; @(negedge clk); start = 0; @(negedge clk);
    while (!done) @(negedge clk);
    cyc = int'(cycle_count);
  endtask
  task automatic load_twiddles(int r);
    u64 qq, z;
    u64 zp [];
    qq = QS[r]; z = prim_root(qq, 4 * N);
    zp = new[4 * N];
    zp[0] = 1;
    for (int i = 1; i < 4 * N; i++) zp[i] = mulm(zp[i-1], z, qq);
    cfg1(r, CFG_Q, 0, qq); cfg1(r, CFG_MU, 0, 64'(barrett_mu(qq))); cfg1(r, CFG_QBITS, 0, 60);
    for (int c = 0; c < CORES; c++)
      for (int s = 0; s < LOGN; s++) begin
        int cnt, g, idx, e;
        cnt = (s < LC) ? 1 : 1 << (s - LC);
        for (int go = 0; go < cnt; go++) begin
          if (s < LC) begin g = c >> (LC - s); idx = BD - 1 + s; end
          else begin g = c * cnt + go; idx = cnt - 1 + go; end
          e = 2 * brv((1 << s) + g, LOGN) - N / (2 << s);
          for (int d = 0; d < 2; d++)
            cfg1(r, CFG_TF, (c << (IW + 1)) | (d << IW) | idx, zp[((d ? -e : e) % (4 * N) + 4 * N) % (4 * N)]);
        end
      end
    for (int rg = 0; rg < 3; rg++) for (int d = 0; d < 2; d++) for (int s = 0; s < LOGN; s++) begin
      int e;
      e = (rg == 0) ? 0 : (rg == 1) ? N / (1 << s) : N / (2 << s);
      cfg1(r, CFG_TFSCL, (rg << (SW + 1)) | (d << SW) | s, zp[((d ? -e : e) % (4 * N) + 4 * N) % (4 * N)]);
    end
  endtask

  int ntt_busy [2], dyd_busy [2], n_overlap = 0;
  always @(posedge clk) if (!rst) begin
    for (int r = 0; r < 2; r++) begin
      if (m_busy[r]) ntt_busy[r]++;
      if (d_busy[r]) dyd_busy[r]++;
    end
    if (m_busy[0] && d_busy[0]) n_overlap++;
  end

  initial begin
    #20ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    u64 a [2][], b [2][], r[];
    instr_t p0[], p1[];
    int cyc, ok;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    for (int rr = 0; rr < 2; rr++) begin
      load_twiddles(rr);
      a[rr] = new[N]; b[rr] = new[N];
      for (int i = 0; i < N; i++) begin a[rr][i] = {$urandom, $urandom} % QS[rr]; b[rr][i] = {$urandom, $urandom} % QS[rr]; end
      host_write(rr, 0, a[rr]); host_write(rr, 1, b[rr]);
    end
    p0 = new[3]; p0[0] = mk(OP_NTT, 3, 0, 0, 0, 2); p0[1] = mk(OP_SYNC, 3, 0, 0, 0, 0); p0[2] = mk(OP_END, 0, 0, 0, 0, 0);
    p1 = new[3]; p1[0] = mk(OP_DMUL, 3, 2, 1, 1, 0); p1[1] = mk(OP_SYNC, 3, 0, 0, 0, 0); p1[2] = mk(OP_END, 0, 0, 0, 0, 0);
    load_prog(0, p0); load_prog(1, p1);
    for (int r = 0; r < 2; r++) begin ntt_busy[r] = 0; dyd_busy[r] = 0; end
    run(cyc);
    $display("NTT run: %0d cycles, main busy %0d, dyadic busy %0d", cyc, ntt_busy[0], dyd_busy[0]);
    for (int rr = 0; rr < 2; rr++) begin
      check(ntt_busy[rr] == LOGN * (BD / 2 + LAT + 3) + LAT + 1, $sformatf("RPAU%0d NTT busy %0d", rr, ntt_busy[rr]));
      check(dyd_busy[rr] == N / 4 + LAT + 3, $sformatf("RPAU%0d DMUL busy %0d", rr, dyd_busy[rr]));
    end
    check(ntt_busy[0] * 100 <= 7200 * 105, "NTT within 5% of the published cycle count");
    check(n_overlap == dyd_busy[0], "dyadic operation fully overlapped with the NTT");
    check(cyc >= ntt_busy[0] && cyc <= ntt_busy[0] + 4, $sformatf("run cycle count %0d", cyc));
    for (int rr = 0; rr < 2; rr++) begin
      u64 qq, psi;
      qq = QS[rr]; psi = prim_root(qq, 2 * N);
      psi = mulm(prim_root(qq, 4 * N), prim_root(qq, 4 * N), qq);
      host_read(rr, 0, r); ok = 0;
      for (int t = 0; t < 6; t++) begin
        int i;
        i = (t * 2731 + 17) % N;
        if (r[i] == eval_poly(a[rr], powm(psi, u64'(2 * brv(i, LOGN) + 1), qq), qq)) ok++;
      end
      check(ok == 6, $sformatf("RPAU%0d NTT sample slots %0d/6", rr, ok));
      host_read(rr, 2, r); ok = 0;
      for (int i = 0; i < N; i++) if (r[i] == mulm(b[rr][i], b[rr][i], qq)) ok++;
      check(ok == N, $sformatf("RPAU%0d DMUL", rr));
    end
    p0 = new[3]; p0[0] = mk(OP_INTT, 3, 0, 0, 0, 2); p0[1] = mk(OP_SYNC, 3, 0, 0, 0, 0); p0[2] = mk(OP_END, 0, 0, 0, 0, 0);
    p1 = new[1]; p1[0] = mk(OP_END, 0, 0, 0, 0, 0);
    load_prog(0, p0); load_prog(1, p1);
    run(cyc);
    for (int rr = 0; rr < 2; rr++) begin
      host_read(rr, 0, r);
      check(r == a[rr], $sformatf("RPAU%0d INTT round trip", rr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
