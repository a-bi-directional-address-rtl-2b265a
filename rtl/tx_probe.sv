// TX_Probe: tells the switch controller whether an outgoing event is in flight.
//
// A keeper node goes high when the TX FIFO presents an event (tx_in_req) while
// the linked block is not asking for the bus (sw_req low), and goes low when
// tx_in_req is withdrawn. tx_p is that node ORed with tx_in_ack, so it stays
// high from the moment the TX_Buffer accepts an event until the 4-phase
// handshake with the FIFO has fully returned to zero. While tx_p is high the
// block will not hand the bus over. An event that arrives after the partner
// has asked for the bus does not raise tx_p, so a switch request wins over
// new traffic.
//
// The input names and the OR with tx_in_ack follow the paper's TX_Probe
// schematic; the clocked form is this design's own. tx_p follows its inputs
// one clock later (node) or at once (tx_in_ack path).
module tx_probe (
  input  logic clk,
  input  logic rst,
  input  logic tx_in_req,   // event offered by the TX FIFO
  input  logic tx_in_ack,   // TX_Buffer acknowledge to the TX FIFO
  input  logic sw_req,      // linked block's SW_ack: it wants the bus
  output logic tx_p         // 1 while an accepted event is not finished
);

  logic pending;

  pchb_keeper u_node (
    .clk     (clk),
    .rst     (rst),
    .rst_val (1'b0),
    .set     (tx_in_req && !sw_req),
    .clr     (!tx_in_req),
    .q       (pending)
  );

  assign tx_p = pending || tx_in_ack;

endmodule
