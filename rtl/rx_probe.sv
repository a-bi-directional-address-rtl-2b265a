// RX_Probe: remembers that the block has received an event in RX mode.
//
// rx_p is a keeper node. It is set when an event request arrives from the bus
// (rx_in_req) while the linked block owns the bus (sw_req high, i.e. this
// block is in RX mode), and cleared whenever sw_req is low, i.e. while this
// block is the transmitter. The switch controller only asks for the bus when
// rx_p is 1, so after every hand-over the partner gets to deliver at least
// one event before the bus is taken back. At reset rx_p is 1 for a block
// reset into RX mode, so that block may ask for the bus at once, and 0 for a
// block reset into TX mode, as the paper states. rx_p changes one clock after
// its inputs.
module rx_probe
  import ae_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  ae_mode_e t_r,        // mode the block is reset into
  input  logic     sw_req,     // linked block's SW_ack
  input  logic     rx_in_req,  // event request from the bus (already gated by RX_EN)
  output logic     rx_p        // 1: at least one event received in RX mode
);

  pchb_keeper u_node (
    .clk     (clk),
    .rst     (rst),
    .rst_val (t_r == MODE_RX),
    .set     (sw_req && rx_in_req),
    .clr     (!sw_req),
    .q       (rx_p)
  );

endmodule
