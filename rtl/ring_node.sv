// ring_node: one stop of the broadcast ring that links the RPAUs.
// The ring carries a beat {valid, origin, data} where data is 2*CORES
// coefficients (two per memory bank). Each node registers its output, so
// a beat advances one RPAU per cycle.
//   - When the local RPAU transmits (tx_valid) the node sends its own
//     beat tagged with its id.
//   - Otherwise it forwards the incoming beat, except a beat that has
//     travelled all the way round (origin == my_id), which is dropped.
//   - Every incoming beat from another node is offered to the local RPAU
//     (rx_valid/rx_data); the RPAU decides whether it is a receiver.
// The published design moves polynomials between RPAUs by a broadcast
// instruction over a ring; the beat format and drop rule are this
// design's choices. Only one RPAU transmits at a time (one broadcast
// instruction at a time), which an assertion checks locally.
module ring_node #(
  parameter int unsigned W     = 60,
  parameter int unsigned CORES = 16,
  parameter int unsigned ID_W  = 4
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [ID_W-1:0] my_id,
  // from previous node
  input  logic            prev_valid,
  input  logic [ID_W-1:0] prev_origin,
  input  logic [W-1:0]    prev_data [CORES][2],
  // to next node
  output logic            next_valid,
  output logic [ID_W-1:0] next_origin,
  output logic [W-1:0]    next_data [CORES][2],
  // local RPAU
  input  logic            tx_valid,
  input  logic [W-1:0]    tx_data [CORES][2],
  output logic            rx_valid,
  output logic [W-1:0]    rx_data [CORES][2]
);
  logic foreign;
  assign foreign  = prev_valid && (prev_origin != my_id);
  assign rx_valid = foreign;
  assign rx_data  = prev_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      next_valid  <= 1'b0;
      next_origin <= '0;
      for (int c = 0; c < int'(CORES); c++) begin
        next_data[c][0] <= '0; next_data[c][1] <= '0;
      end
    end else if (tx_valid) begin
      next_valid  <= 1'b1;
      next_origin <= my_id;
      next_data   <= tx_data;
    end else begin
      next_valid  <= foreign;
      next_origin <= prev_origin;
      next_data   <= prev_data;
    end
  end

  a_single_sender: assert property (@(posedge clk) disable iff (rst) !(tx_valid && foreign));
endmodule
