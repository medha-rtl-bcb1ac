// tb_ring_node: three ring nodes closed into a ring. Node 1 transmits a
// burst of beats; checks that nodes 2 and 0 each receive every beat once,
// in order, one and two cycles after transmission, that node 1 never
// receives its own beats and that the ring is empty after the burst has
// gone round.
module tb_ring_node;
  localparam int W = 60, CORES = 2, R = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic        nv [R];
  logic [3:0]  no [R];
  logic [W-1:0] nd [R][CORES][2];
  logic        txv [R], rxv [R];
  logic [W-1:0] txd [R][CORES][2], rxd [R][CORES][2];
  int checks = 0, failures = 0;
  for (genvar r = 0; r < R; r++) begin : g
    ring_node #(.W(W), .CORES(CORES), .ID_W(4)) u (
      .clk, .rst, .my_id(4'(r)), .prev_valid(nv[(r+R-1)%R]), .prev_origin(no[(r+R-1)%R]),
      .prev_data(nd[(r+R-1)%R]), .next_valid(nv[r]), .next_origin(no[r]), .next_data(nd[r]),
      .tx_valid(txv[r]), .tx_data(txd[r]), .rx_valid(rxv[r]), .rx_data(rxd[r]));
  end
  int cyc = 0;
  always @(posedge clk) cyc++;
  int got [R];
  logic [W-1:0] sent [$];
  int sent_t [$];
  initial begin
    #1ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  always @(negedge clk) if (!rst) begin
    for (int r = 0; r < R; r++) if (rxv[r]) begin
      int lag;
      lag = (r == 2) ? 1 : 2;
      checks++;
      if (r == 1 || got[r] >= sent.size() || rxd[r][1][1] != sent[got[r]] ||
          cyc - sent_t[got[r]] != lag) begin
        failures++; if (failures < 5) $display("FAIL node %0d beat %0d", r, got[r]);
      end
      got[r]++;
    end
  end
  initial begin
    for (int r = 0; r < R; r++) begin
      txv[r] = 0; got[r] = 0;
      for (int c = 0; c < CORES; c++) begin txd[r][c][0] = 0; txd[r][c][1] = 0; end
    end
    repeat (2) @(negedge clk); rst = 0;
    for (int b = 0; b < 20; b++) begin
      logic [W-1:0] v;
      v = W'({$urandom, $urandom});
      txv[1] = (b % 4) != 3;
      for (int c = 0; c < CORES; c++) begin txd[1][c][0] = v; txd[1][c][1] = v; end
      if (txv[1]) begin sent.push_back(v); sent_t.push_back(cyc); end
      @(negedge clk);
    end
    txv[1] = 0;
    repeat (6) @(negedge clk);
    checks += 3;
    if (got[0] != sent.size()) failures++;
    if (got[2] != sent.size()) failures++;
    if (nv[0] || nv[1] || nv[2]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
