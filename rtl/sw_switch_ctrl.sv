// TX/RX Switch Controller: drives SW_ack and the TX_EN/RX_EN mode signals.
//
// SW_ack is this block's half of the two-wire switch protocol; the linked
// block sees it as its SW_req. SW_ack is a keeper node:
//   * it rises (request RX->TX) when an event waits to be sent (tx_in_req),
//     the block is in RX mode (rx_en) and it has received at least one event
//     in that mode (rx_p);
//   * it falls (grant TX->RX) when the partner asks (sw_req), no event is in
//     flight (tx_p low) and the block is in TX mode (rx_en low);
//   * otherwise it holds.
// The mode is the C-element of (not sw_req) and sw_ack: TX_EN goes to 1 once
// this block has asked and the partner has let go (sw_ack=1, sw_req=0) and to
// 0 once this block has let go while the partner asks (sw_ack=0, sw_req=1).
// RX_EN is its complement, so the two modes can never overlap inside a block,
// and the protocol keeps the two linked blocks from both being in TX mode.
//
// The guards, the C-element and the reset behaviour follow the paper; the
// reset value of sw_ack and of the mode is the reset mode t_r, matching the
// paper's example where the TX side starts with SW_ack=1 and the RX side with
// SW_ack=0. sw_ack and the mode each take one clock.
module sw_switch_ctrl
  import ae_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  ae_mode_e t_r,
  input  logic     sw_req,     // linked block's SW_ack
  input  logic     tx_in_req,  // an event waits in front of the TX_Buffer
  input  logic     rx_p,       // from RX_Probe
  input  logic     tx_p,       // from TX_Probe
  output logic     sw_ack,
  output logic     tx_en,
  output logic     rx_en
);

  logic mode_tx;

  pchb_keeper u_ack (
    .clk     (clk),
    .rst     (rst),
    .rst_val (t_r == MODE_TX),
    .set     (tx_in_req && rx_en && rx_p),
    .clr     (sw_req && !tx_p && !rx_en),
    .q       (sw_ack)
  );

  c_element u_mode (
    .clk     (clk),
    .rst     (rst),
    .rst_val (t_r == MODE_TX),
    .a       (!sw_req),
    .b       (sw_ack),
    .q       (mode_tx)
  );

  assign tx_en = mode_tx;
  assign rx_en = !mode_tx;

endmodule
