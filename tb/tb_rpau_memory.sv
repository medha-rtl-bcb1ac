// tb_rpau_memory: random traffic on the main ports (2R/2W per bank) and
// the dyadic ports (3R/1W per lane, lanes in different banks) of a
// reduced memory (N = 256, 4 banks, 2 lanes), compared with a flat
// software model of all 31 polynomials; reads have one cycle latency.
module tb_rpau_memory;
  import medha_pkg::*;
  localparam int W = 60, N = 256, CORES = 4, DYD = 2, BD = N / CORES, LBD = $clog2(BD), LOGN = $clog2(N);
  logic clk = 0;
  always #5 clk = ~clk;
  logic              m_rd_en [CORES][2], m_wr_en [CORES][2];
  logic [POLY_W-1:0] m_rd_poly [CORES][2], m_wr_poly [CORES][2];
  logic [LBD-1:0]    m_rd_addr [CORES][2], m_wr_addr [CORES][2];
  logic [W-1:0]      m_rd_data [CORES][2], m_wr_data [CORES][2];
  logic              d_rd_en [DYD][3], d_wr_en [DYD];
  logic [POLY_W-1:0] d_rd_poly [DYD][3], d_wr_poly [DYD];
  logic [LOGN-1:0]   d_rd_n [DYD][3], d_wr_n [DYD];
  logic [W-1:0]      d_rd_data [DYD][3], d_wr_data [DYD];
  int checks = 0, failures = 0;
  rpau_memory #(.W(W), .N(N), .CORES(CORES), .DYD(DYD)) dut (.*);
  logic [W-1:0] model [NUM_POLY][N];
  initial begin
    #2ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    logic [W-1:0] em [CORES][2], ed [DYD][3];
    bit vm [CORES][2], vd [DYD][3];
    // fill every word through main port 0
    for (int p = 0; p < NUM_POLY; p++)
      for (int a = 0; a < BD; a++) begin
        for (int c = 0; c < CORES; c++) begin
          m_wr_en[c][0] = 1; m_wr_en[c][1] = 0; m_rd_en[c][0] = 0; m_rd_en[c][1] = 0;
          m_wr_poly[c][0] = POLY_W'(p); m_wr_addr[c][0] = LBD'(a);
          m_wr_data[c][0] = W'({$urandom, $urandom});
          model[p][c*BD + a] = m_wr_data[c][0];
          m_wr_poly[c][1] = 0; m_wr_addr[c][1] = 0; m_wr_data[c][1] = 0;
          m_rd_poly[c][0] = 0; m_rd_poly[c][1] = 0; m_rd_addr[c][0] = 0; m_rd_addr[c][1] = 0;
        end
        for (int l = 0; l < DYD; l++) begin
          d_wr_en[l] = 0; d_wr_poly[l] = 0; d_wr_n[l] = 0; d_wr_data[l] = 0;
          for (int k = 0; k < 3; k++) begin d_rd_en[l][k] = 0; d_rd_poly[l][k] = 0; d_rd_n[l][k] = 0; end
        end
        @(negedge clk);
      end
    for (int c = 0; c < CORES; c++) m_wr_en[c][0] = 0;
    // random traffic
    for (int it = 0; it < 400; it++) begin
      int lb [DYD];
      lb[0] = $urandom % CORES; lb[1] = (lb[0] + 1 + $urandom % (CORES - 1)) % CORES;
      for (int c = 0; c < CORES; c++) begin
        int wa0, wa1;
        wa0 = $urandom % BD; wa1 = (wa0 + 1 + $urandom % (BD - 1)) % BD;
        for (int p = 0; p < 2; p++) begin
          m_rd_en[c][p] = $urandom % 2; m_rd_poly[c][p] = POLY_W'($urandom % NUM_POLY);
          m_rd_addr[c][p] = LBD'($urandom % BD);
          vm[c][p] = m_rd_en[c][p];
          em[c][p] = model[m_rd_poly[c][p]][c*BD + m_rd_addr[c][p]];
          m_wr_en[c][p] = $urandom % 2; m_wr_poly[c][p] = POLY_W'(p + 2 * ($urandom % 6));
          m_wr_addr[c][p] = LBD'(p ? wa1 : wa0); m_wr_data[c][p] = W'({$urandom, $urandom});
        end
      end
      for (int l = 0; l < DYD; l++) begin
        for (int k = 0; k < 3; k++) begin
          d_rd_en[l][k] = $urandom % 2; d_rd_poly[l][k] = POLY_W'($urandom % NUM_POLY);
          d_rd_n[l][k] = LOGN'(lb[l] * BD + $urandom % BD);
          vd[l][k] = d_rd_en[l][k];
          ed[l][k] = model[d_rd_poly[l][k]][d_rd_n[l][k]];
        end
        d_wr_en[l] = $urandom % 2; d_wr_poly[l] = POLY_W'(20 + l);   // distinct from main writes
        d_wr_n[l] = LOGN'(lb[l] * BD + $urandom % BD); d_wr_data[l] = W'({$urandom, $urandom});
      end
      // apply writes to the model
      for (int c = 0; c < CORES; c++) for (int p = 0; p < 2; p++)
        if (m_wr_en[c][p]) model[m_wr_poly[c][p]][c*BD + m_wr_addr[c][p]] = m_wr_data[c][p];
      for (int l = 0; l < DYD; l++) if (d_wr_en[l]) model[d_wr_poly[l]][d_wr_n[l]] = d_wr_data[l];
      @(negedge clk);
      for (int c = 0; c < CORES; c++) for (int p = 0; p < 2; p++)
        if (vm[c][p]) begin checks++; if (m_rd_data[c][p] != em[c][p]) failures++; end
      for (int l = 0; l < DYD; l++) for (int k = 0; k < 3; k++)
        if (vd[l][k]) begin checks++; if (d_rd_data[l][k] != ed[l][k]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
