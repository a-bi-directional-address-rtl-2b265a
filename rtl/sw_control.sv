// SW_Control: decides, event by event, which of two linked transceivers owns
// the shared AER bus.
//
// It joins the RX_Probe (has an event been received in RX mode?), the
// TX_Probe (is an outgoing event still in flight?) and the TX/RX Switch
// Controller (SW_ack and the TX_EN/RX_EN modes). The SW_ack output of one
// block is wired to the SW_req input of the other and vice versa; the pair
// then moves through the sequence of the paper's mode table:
//   (ackL,ackR) = (1,0) left TX -> (1,1) right asks -> (0,1) left grants,
//   right TX -> (1,1) left asks -> (1,0) right grants, left TX.
// A hand-over takes two clocks from the request to the new TX_EN: one for
// the partner's SW_ack to fall, one for both C-elements to flip.
module sw_control
  import ae_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  ae_mode_e t_r,        // mode this block is reset into
  input  logic     sw_req,     // linked block's SW_ack
  input  logic     tx_in_req,  // TX FIFO -> TX_Buffer request
  input  logic     tx_in_ack,  // TX_Buffer -> TX FIFO acknowledge
  input  logic     rx_in_req,  // bus request seen by the RX_Buffer
  output logic     sw_ack,     // to the linked block's SW_req
  output logic     tx_en,
  output logic     rx_en,
  output logic     rx_p,
  output logic     tx_p
);

  rx_probe u_rx_probe (
    .clk       (clk),
    .rst       (rst),
    .t_r       (t_r),
    .sw_req    (sw_req),
    .rx_in_req (rx_in_req),
    .rx_p      (rx_p)
  );

  tx_probe u_tx_probe (
    .clk       (clk),
    .rst       (rst),
    .tx_in_req (tx_in_req),
    .tx_in_ack (tx_in_ack),
    .sw_req    (sw_req),
    .tx_p      (tx_p)
  );

  sw_switch_ctrl u_ctrl (
    .clk       (clk),
    .rst       (rst),
    .t_r       (t_r),
    .sw_req    (sw_req),
    .tx_in_req (tx_in_req),
    .rx_p      (rx_p),
    .tx_p      (tx_p),
    .sw_ack    (sw_ack),
    .tx_en     (tx_en),
    .rx_en     (rx_en)
  );

endmodule
