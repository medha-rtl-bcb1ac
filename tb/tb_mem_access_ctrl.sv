// tb_mem_access_ctrl: checks the port multiplexing of the memory access
// controller with random stimuli — with host_en low every main-core
// request passes unchanged; with host_en high port 0 of every bank
// carries the host word (read or write) and all core requests are
// blocked; host read data is port 0 read data.
module tb_mem_access_ctrl;
  import medha_pkg::*;
  localparam int W = 60, N = 64, CORES = 4, DYD = 2, BD = N / CORES, LBD = $clog2(BD), LOGN = $clog2(N);
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic host_en = 0, host_we = 0, core_busy = 0;
  logic [POLY_W-1:0] host_poly = 0;
  logic [LBD-1:0] host_addr = 0;
  logic [W-1:0] host_wdata [CORES], host_rdata [CORES];
  logic              c_rd_en [CORES][2], c_wr_en [CORES][2], m_rd_en [CORES][2], m_wr_en [CORES][2];
  logic [POLY_W-1:0] c_rd_poly [CORES][2], c_wr_poly [CORES][2], m_rd_poly [CORES][2], m_wr_poly [CORES][2];
  logic [LBD-1:0]    c_rd_addr [CORES][2], c_wr_addr [CORES][2], m_rd_addr [CORES][2], m_wr_addr [CORES][2];
  logic [W-1:0]      c_rd_data [CORES][2], c_wr_data [CORES][2], m_rd_data [CORES][2], m_wr_data [CORES][2];
  logic              d_wr_en [DYD];
  logic [POLY_W-1:0] d_wr_poly [DYD];
  logic [LOGN-1:0]   d_wr_n [DYD];
  int checks = 0, failures = 0;
  mem_access_ctrl #(.W(W), .N(N), .CORES(CORES), .DYD(DYD)) dut (.*);
  task automatic chk(bit ok); checks++; if (!ok) failures++; endtask
  initial begin
    #1ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    for (int l = 0; l < DYD; l++) begin d_wr_en[l] = 0; d_wr_poly[l] = 0; d_wr_n[l] = 0; end
    repeat (2) @(negedge clk); rst = 0;
    for (int it = 0; it < 300; it++) begin
      host_en = (it % 3) == 0; host_we = $urandom % 2;
      host_poly = POLY_W'($urandom); host_addr = LBD'($urandom);
      for (int c = 0; c < CORES; c++) begin
        host_wdata[c] = W'({$urandom, $urandom});
        for (int p = 0; p < 2; p++) begin
          c_rd_en[c][p] = $urandom % 2; c_rd_poly[c][p] = POLY_W'($urandom); c_rd_addr[c][p] = LBD'($urandom);
          c_wr_en[c][p] = !host_en && (p == 0 || $urandom % 2); c_wr_poly[c][p] = POLY_W'(p);
          c_wr_addr[c][p] = LBD'($urandom); c_wr_data[c][p] = W'({$urandom, $urandom});
          m_rd_data[c][p] = W'({$urandom, $urandom});
        end
      end
      #1;
      for (int c = 0; c < CORES; c++) begin
        chk(host_rdata[c] == m_rd_data[c][0]);
        for (int p = 0; p < 2; p++) begin
          chk(c_rd_data[c][p] == m_rd_data[c][p]);
          if (host_en) begin
            chk(m_rd_en[c][p] == (p == 0 && !host_we));
            chk(m_wr_en[c][p] == (p == 0 && host_we));
            if (p == 0) chk(m_wr_data[c][0] == host_wdata[c] && m_wr_addr[c][0] == host_addr &&
                            m_rd_poly[c][0] == host_poly);
          end else begin
            chk(m_rd_en[c][p] == c_rd_en[c][p] && m_rd_poly[c][p] == c_rd_poly[c][p] &&
                m_rd_addr[c][p] == c_rd_addr[c][p]);
            chk(m_wr_en[c][p] == c_wr_en[c][p] && m_wr_data[c][p] == c_wr_data[c][p] &&
                m_wr_addr[c][p] == c_wr_addr[c][p] && m_wr_poly[c][p] == c_wr_poly[c][p]);
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
