// tb_butterfly_core: drives the unified butterfly in all five modes with
// random operands and checks results and timing:
//   DIT: t and w at cycle T, u at T+LAT; both results at T+LAT+1
//   DIF: u, t, w at T; u result at T+1, t result at T+LAT+1
//   ADD/SUB: result on u at T+1; MUL: t*w on t at T+LAT+1
// Each mode is streamed back to back (one butterfly per cycle), with a
// drain between modes, as the main core sequencer does. Tags identify
// the operations.
module tb_butterfly_core;
  import medha_pkg::*;
  import tb_math_pkg::*;
  localparam int LAT = 20, W = 60;
  localparam u64 Q = 64'h0fffffffff6a0001;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [W-1:0] q, in_u = 0, in_t = 0, in_w = 0, dly_u = 0;
  logic [W+7:0] mu;
  logic in_valid = 0;
  bf_mode_e mode = BF_DIT;
  logic [15:0] tu = 0, tt = 0;
  logic ovu, ovt;
  logic [W-1:0] ou, ot;
  logic [15:0] otu, ott;
  int checks = 0, failures = 0;
  butterfly_core #(.W(W), .LAT(LAT)) dut (
    .clk, .rst, .q, .mu, .in_valid, .mode, .in_u, .in_t, .in_w, .in_tag_u(tu), .in_tag_t(tt),
    .dly_u, .out_u_valid(ovu), .out_u(ou), .out_u_tag(otu),
    .out_t_valid(ovt), .out_t(ot), .out_t_tag(ott));

  u64 exp_u [int], exp_t [int];
  int due_u [int], due_t [int];
  u64 pend_u [int];          // DIT u values to present LAT cycles later
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #2ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  always @(negedge clk) if (!rst) begin
    if (ovu) begin
      checks++;
      if (!exp_u.exists(int'(otu)) || u64'(ou) != exp_u[int'(otu)] || due_u[int'(otu)] != cyc) begin
        failures++; if (failures < 6) $display("FAIL u tag %0d", otu);
      end
      exp_u.delete(int'(otu));
    end
    if (ovt) begin
      checks++;
      if (!exp_t.exists(int'(ott)) || u64'(ot) != exp_t[int'(ott)] || due_t[int'(ott)] != cyc) begin
        failures++; if (failures < 6) $display("FAIL t tag %0d", ott);
      end
      exp_t.delete(int'(ott));
    end
  end

  function automatic u64 half(u64 x);
    return (x & 1) ? (x + Q) >> 1 : x >> 1;
  endfunction

  initial begin
    int tag; tag = 0;
    q = W'(Q); mu = barrett_mu(Q);
    repeat (2) @(negedge clk); rst = 0;
    for (int m = 0; m < 5; m++) begin
      for (int i = 0; i < 60 + LAT; i++) begin
        u64 u, t, w;
        bit issue;
        issue = i < 60;
        u = {$urandom, $urandom} % Q; t = {$urandom, $urandom} % Q; w = {$urandom, $urandom} % Q;
        mode = bf_mode_e'(m);
        in_valid = issue;
        in_u = W'(u); in_t = W'(t); in_w = W'(w);
        tu = 16'(tag); tt = 16'(tag);
        // DIT: present the u of the butterfly issued LAT cycles ago
        dly_u = pend_u.exists(tag - LAT) ? W'(pend_u[tag - LAT]) : '0;
        if (issue) begin
          unique case (mode)
            BF_DIT: begin
              pend_u[tag] = u;
              exp_u[tag] = addm(u, mulm(t, w, Q), Q); due_u[tag] = cyc + LAT + 1;
              exp_t[tag] = subm(u, mulm(t, w, Q), Q); due_t[tag] = cyc + LAT + 1;
            end
            BF_DIF: begin
              exp_u[tag] = half(addm(u, t, Q)); due_u[tag] = cyc + 1;
              exp_t[tag] = half(mulm(subm(u, t, Q), w, Q)); due_t[tag] = cyc + LAT + 1;
            end
            BF_ADD: begin exp_u[tag] = addm(u, t, Q); due_u[tag] = cyc + 1; end
            BF_SUB: begin exp_u[tag] = subm(u, t, Q); due_u[tag] = cyc + 1; end
            default: begin exp_t[tag] = mulm(t, w, Q); due_t[tag] = cyc + LAT + 1; end
          endcase
        end
        tag++;
        @(negedge clk);
      end
      in_valid = 0;
      repeat (LAT + 3) @(negedge clk);
    end
    checks++; if (exp_u.size() != 0 || exp_t.size() != 0) begin failures++; $display("FAIL: missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
