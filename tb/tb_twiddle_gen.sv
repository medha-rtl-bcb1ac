// tb_twiddle_gen: loads a table and ring scales into the twiddle
// generator, then streams table requests (one per cycle) and
// external-operand requests; checks w = table[dir][idx] *
// scale[ring][dir][stage] mod q (or ext_a*ext_b) and the latency LAT+1.
module tb_twiddle_gen;
  import tb_math_pkg::*;
  localparam int W = 60, LAT = 20, LOGN = 14, DEPTH = 1027;
  localparam int IW = $clog2(DEPTH), SW = $clog2(LOGN);
  localparam u64 Q = 64'h0fffffffff5a0001;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [W-1:0] q, cfg_data = 0, ext_a = 0, ext_b = 0, w;
  logic [W+7:0] mu;
  logic cfg_tf_we = 0, cfg_tf_dir = 0, cfg_scl_we = 0, cfg_scl_dir = 0;
  logic [IW-1:0] cfg_tf_addr = 0, req_idx = 0;
  logic [1:0] cfg_scl_ring = 0, req_ring = 0;
  logic [SW-1:0] cfg_scl_stage = 0, req_stage = 0;
  logic req_valid = 0, req_ext = 0, req_dir = 0, w_valid;
  int checks = 0, failures = 0;
  twiddle_gen #(.W(W), .LAT(LAT), .LOGN(LOGN), .DEPTH(DEPTH)) dut (.*);
  u64 tbl [2][DEPTH];
  u64 scl [3][2][LOGN];
  u64 expq [$];
  int due [$];
  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    #2ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  always @(negedge clk) if (!rst && w_valid) begin
    u64 e; int d;
    e = expq.pop_front(); d = due.pop_front();
    checks++;
    if (u64'(w) != e || d != cyc) begin failures++; if (failures < 5) $display("FAIL w=%h exp=%h", w, e); end
  end
  initial begin
    q = W'(Q); mu = barrett_mu(Q);
    repeat (2) @(negedge clk); rst = 0;
    for (int d = 0; d < 2; d++)
      for (int i = 0; i < DEPTH; i++) begin
        tbl[d][i] = {$urandom, $urandom} % Q;
        cfg_tf_we = 1; cfg_tf_dir = d[0]; cfg_tf_addr = IW'(i); cfg_data = W'(tbl[d][i]);
        @(negedge clk);
      end
    cfg_tf_we = 0;
    for (int r = 0; r < 3; r++) for (int d = 0; d < 2; d++) for (int s = 0; s < LOGN; s++) begin
      scl[r][d][s] = {$urandom, $urandom} % Q;
      cfg_scl_we = 1; cfg_scl_ring = 2'(r); cfg_scl_dir = d[0]; cfg_scl_stage = SW'(s);
      cfg_data = W'(scl[r][d][s]);
      @(negedge clk);
    end
    cfg_scl_we = 0;
    for (int i = 0; i < 800; i++) begin
      int id, r, d, s;
      u64 a, b;
      id = $urandom % DEPTH; r = $urandom % 3; d = $urandom % 2; s = $urandom % LOGN;
      a = {$urandom, $urandom} % Q; b = {$urandom, $urandom} % Q;
      req_valid = ($urandom % 5) != 0;
      req_ext = (i % 7) == 3;
      req_idx = IW'(id); req_ring = 2'(r); req_dir = d[0]; req_stage = SW'(s);
      ext_a = W'(a); ext_b = W'(b);
      if (req_valid) begin
        expq.push_back(req_ext ? mulm(a, b, Q) : mulm(tbl[d][id], scl[r][d][s], Q));
        due.push_back(cyc + LAT + 1);
      end
      @(negedge clk);
    end
    req_valid = 0;
    repeat (LAT + 4) @(negedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
