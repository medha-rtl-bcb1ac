// tb_rpau: one RPAU on a reduced ring (N = 64, 4 cores, 4 dyadic lanes,
// latency 4). Configures modulus, twiddles and scalars through the
// configuration port, loads polynomials through the host port and
// checks: an NTT on the main group running at the same time as a DMUL on
// the dyadic group (both results correct, both groups busy together),
// the INTT round trip, CSCALE with a configured scalar, and a broadcast
// received from the ring (beats from another RPAU are stored and also
// forwarded to the next node one cycle later).
module tb_rpau;
  import medha_pkg::*;
  import tb_math_pkg::*;
  localparam int W = 60, N = 64, CORES = 4, DYD = 4, LAT = 4;
  localparam int BD = N / CORES, LBD = $clog2(BD), LOGN = $clog2(N), LC = $clog2(CORES);
  localparam int TF_DEPTH = BD + LC - 1, IW = $clog2(TF_DEPTH), SW = $clog2(LOGN);
  localparam u64 Q = 64'h0ffffffffefe0001;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic m_instr_valid = 0, d_instr_valid = 0, m_busy, d_busy;
  instr_t m_instr, d_instr;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_Q;
  logic [15:0] cfg_addr = 0;
  logic [63:0] cfg_data = 0;
  logic host_en = 0, host_we = 0;
  logic [POLY_W-1:0] host_poly = 0;
  logic [LBD-1:0] host_addr = 0;
  logic [W-1:0] host_wdata [CORES], host_rdata [CORES];
  logic prev_valid = 0, next_valid;
  logic [3:0] prev_origin = 0, next_origin;
  logic [W-1:0] prev_data [CORES][2], next_data [CORES][2];
  int checks = 0, failures = 0;
  rpau #(.W(W), .N(N), .CORES(CORES), .DYD(DYD), .LAT(LAT)) dut (.clk, .rst, .my_id(4'd0), .*);

  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic cfg(cfg_sel_e s, int a, u64 d);
    @(negedge clk); cfg_we = 1; cfg_sel = s; cfg_addr = 16'(a); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic host_write(int poly, input u64 a[]);
    @(negedge clk); host_en = 1; host_we = 1; host_poly = POLY_W'(poly);
    for (int ad = 0; ad < BD; ad++) begin
      host_addr = LBD'(ad);
      for (int c = 0; c < CORES; c++) host_wdata[c] = W'(a[c*BD + ad]);
      @(negedge clk);
    end
    host_en = 0; host_we = 0;
  endtask
  task automatic host_read(int poly, ref u64 a[]);
    a = new[N];
    @(negedge clk); host_en = 1; host_we = 0; host_poly = POLY_W'(poly);
    for (int ad = 0; ad < BD; ad++) begin
      host_addr = LBD'(ad); @(negedge clk);
      for (int c = 0; c < CORES; c++) a[c*BD + ad] = u64'(host_rdata[c]);
    end
    host_en = 0;
  endtask
  function automatic instr_t mk(opcode_e op, int dst, int s1, int s2, int ring, int sidx);
    instr_t x; x = '0; x.op = op; x.mask = 16'h1; x.dst = POLY_W'(dst); x.src1 = POLY_W'(s1);
    x.src2 = POLY_W'(s2); x.ring = 2'(ring); x.sidx = 4'(sidx); return x;
  endfunction

  int n_both = 0;
  always @(posedge clk) if (m_busy && d_busy) n_both++;
  initial begin
    #5ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    u64 a[], b[], r[], bc[];
    u64 z, psi;
    int ok, fwd;
    for (int c = 0; c < CORES; c++) begin
      host_wdata[c] = 0; prev_data[c][0] = 0; prev_data[c][1] = 0;
    end
    m_instr = '0; d_instr = '0;
    repeat (2) @(negedge clk); rst = 0;
    z = prim_root(Q, 4 * N); psi = mulm(z, z, Q);
    cfg(CFG_Q, 0, Q); cfg(CFG_MU, 0, 64'(barrett_mu(Q))); cfg(CFG_QBITS, 0, 60);
    cfg(CFG_SCALAR, 7, 64'd987654321);
    for (int c = 0; c < CORES; c++)
      for (int s = 0; s < LOGN; s++) begin
        int cnt, g, idx, e;
        cnt = (s < LC) ? 1 : 1 << (s - LC);
        for (int go = 0; go < cnt; go++) begin
          if (s < LC) begin g = c >> (LC - s); idx = BD - 1 + s; end
          else begin g = c * cnt + go; idx = cnt - 1 + go; end
          e = 2 * brv((1 << s) + g, LOGN) - N / (2 << s);
          for (int d = 0; d < 2; d++)
            cfg(CFG_TF, (c << (IW + 1)) | (d << IW) | idx, zpow(z, d ? -e : e, 4 * N, Q));
        end
      end
    for (int rg = 0; rg < 3; rg++) for (int d = 0; d < 2; d++) for (int s = 0; s < LOGN; s++) begin
      int e;
      e = (rg == 0) ? 0 : (rg == 1) ? N / (1 << s) : N / (2 << s);
      cfg(CFG_TFSCL, (rg << (SW + 1)) | (d << SW) | s, zpow(z, d ? -e : e, 4 * N, Q));
    end
    a = new[N]; b = new[N];
    for (int i = 0; i < N; i++) begin a[i] = {$urandom, $urandom} % Q; b[i] = {$urandom, $urandom} % Q; end
    host_write(0, a); host_write(1, b); host_write(2, a);
    // NTT on the main group and DMUL on the dyadic group, same cycle
    @(negedge clk);
    m_instr = mk(OP_NTT, 0, 0, 0, 2, 0); m_instr_valid = 1;
    d_instr = mk(OP_DMUL, 3, 1, 2, 0, 0); d_instr_valid = 1;
    @(negedge clk); m_instr_valid = 0; d_instr_valid = 0;
    while (m_busy || d_busy) @(negedge clk);
    check(n_both > 0, "main and dyadic groups ran together");
    host_read(0, r); ok = 0;
    for (int i = 0; i < N; i++) if (r[i] == eval_poly(a, powm(psi, u64'(2 * brv(i, LOGN) + 1), Q), Q)) ok++;
    check(ok == N, "NTT");
    host_read(3, r); ok = 0;
    for (int i = 0; i < N; i++) if (r[i] == mulm(a[i], b[i], Q)) ok++;
    check(ok == N, "DMUL");
    @(negedge clk); m_instr = mk(OP_INTT, 0, 0, 0, 2, 0); m_instr_valid = 1;
    @(negedge clk); m_instr_valid = 0;
    while (m_busy) @(negedge clk);
    host_read(0, r); check(r == a, "INTT round trip");
    @(negedge clk); m_instr = mk(OP_CSCALE, 4, 1, 0, 0, 7); m_instr_valid = 1;
    @(negedge clk); m_instr_valid = 0;
    while (m_busy) @(negedge clk);
    host_read(4, r); ok = 0;
    for (int i = 0; i < N; i++) if (r[i] == mulm(b[i], 64'd987654321, Q)) ok++;
    check(ok == N, "CSCALE");
    // broadcast from RPAU 3 arriving on the ring
    bc = new[N];
    for (int i = 0; i < N; i++) bc[i] = {$urandom, $urandom} % Q;
    @(negedge clk); m_instr = mk(OP_BCAST, 5, 0, 0, 0, 3); m_instr_valid = 1;
    @(negedge clk); m_instr_valid = 0;
    fwd = 0;
    for (int k = 0; k < BD / 2; k++) begin
      prev_valid = 1; prev_origin = 4'd3;
      for (int c = 0; c < CORES; c++) for (int p = 0; p < 2; p++) prev_data[c][p] = W'(bc[c*BD + 2*k + p]);
      @(negedge clk);
      if (next_valid && next_origin == 4'd3 && next_data[0][0] == W'(bc[2*k])) fwd++;
    end
    prev_valid = 0;
    @(negedge clk);
    while (m_busy) @(negedge clk);
    host_read(5, r); check(r == bc, "broadcast stored");
    check(fwd == BD / 2, "broadcast forwarded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
