// bus_switch_matrix: the crossbar between the butterfly cores and the
// memory banks. NREQ requesters (two lanes per core) each present a
// request {bank, port, payload}; every (bank, port) output takes the
// payload of the one valid request addressed to it. The address schedule
// of rpau_main_core guarantees at most one request per (bank, port) and
// cycle; an assertion checks it.
// For read traffic the matrix also returns data: bank_rdata[b][p] (one
// cycle after the request, the memory read latency) goes back to the
// requester that addressed (b, p) in the previous cycle.
// The published design has a bus switching matrix on the write side of
// the NTT memories; using the same structure for reads is this design's
// choice (it keeps every coefficient fragment in its own bank and
// routes instead of moving data between stages).
module bus_switch_matrix #(
  parameter int unsigned NREQ  = 32,
  parameter int unsigned NBANK = 16,
  parameter int unsigned PW    = 16,   // request payload width
  parameter int unsigned DW    = 60,   // returned data width
  localparam int unsigned BW   = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          req_valid [NREQ],
  input  logic [BW-1:0] req_bank  [NREQ],
  input  logic          req_port  [NREQ],
  input  logic [PW-1:0] req_payload [NREQ],
  output logic          bank_valid   [NBANK][2],
  output logic [PW-1:0] bank_payload [NBANK][2],
  input  logic [DW-1:0] bank_rdata   [NBANK][2],
  output logic [DW-1:0] req_rdata    [NREQ]
);
  // forward routing
  always_comb begin
    for (int b = 0; b < int'(NBANK); b++) begin
      for (int p = 0; p < 2; p++) begin
        bank_valid[b][p]   = 1'b0;
        bank_payload[b][p] = '0;
        for (int r = 0; r < int'(NREQ); r++) begin
          if (req_valid[r] && int'(req_bank[r]) == b && int'(req_port[r]) == p) begin
            bank_valid[b][p]   = 1'b1;
            bank_payload[b][p] = req_payload[r];
          end
        end
      end
    end
  end

  // return routing, one cycle later
  logic [BW-1:0] bank_q [NREQ];
  logic          port_q [NREQ];
  always_ff @(posedge clk) begin
    for (int r = 0; r < int'(NREQ); r++) begin
      if (rst) begin
        bank_q[r] <= '0; port_q[r] <= 1'b0;
      end else begin
        bank_q[r] <= req_bank[r]; port_q[r] <= req_port[r];
      end
    end
  end
  always_comb begin
    for (int r = 0; r < int'(NREQ); r++)
      req_rdata[r] = bank_rdata[bank_q[r]][port_q[r]];
  end

  // at most one request per (bank, port) and cycle
  logic [NBANK*2-1:0] conflict;
  always_comb begin
    conflict = '0;
    for (int r = 0; r < int'(NREQ); r++)
      for (int s = r + 1; s < int'(NREQ); s++)
        if (req_valid[r] && req_valid[s] && req_bank[r] == req_bank[s] &&
            req_port[r] == req_port[s])
          conflict[{req_bank[r], req_port[r]}] = 1'b1;
  end
  a_one_per_port: assert property (@(posedge clk) disable iff (rst) conflict == '0);
endmodule
