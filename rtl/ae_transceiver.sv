// AE transceiver: one end of a bi-directional, bit-parallel AER link.
//
// Two of these blocks, one on each chip, share a single bus (bus_req,
// bus_ack and DATA_W data lines) and two cross-wired switch lines: the
// sw_ack output of each goes to the sw_req input of the other. Events from
// the chip core enter through in_req/in_ack/in_data, wait in the TX FIFO and
// go out through the TX_Buffer when this block owns the bus; events from the
// partner arrive through the RX_Buffer and leave through the RX FIFO on
// out_req/out_ack/out_data. SW_Control hands the bus over on a per-event
// basis: a block that has an event to send and has received at least one
// event since it last gave the bus away raises sw_ack; the owner lets go
// (drops its own sw_ack) as soon as it has no event in flight; the two
// C-elements then swap TX_EN and RX_EN.
//
// Pad side: every bus line is split into _o (value), _oe (drive enable) and
// _i (value on the wire). Tie _i to the wire that the two blocks' _o/_oe
// drive, through tri-state or IO cells. t_r selects the mode applied by the
// synchronous reset rst; one block of a link must be reset to MODE_TX and the
// other to MODE_RX. The link assumes both blocks run from the same clock.
//
// All handshakes are 4-phase. The block composition and signal names follow
// the paper's architecture figure; FIFO depth and matched delay are this
// design's own choices (see ae_pkg).
module ae_transceiver
  import ae_pkg::*;
#(
  parameter int unsigned DATA_W        = ae_pkg::AE_WIDTH,
  parameter int unsigned FIFO_DEPTH    = ae_pkg::AE_FIFO_DEPTH,
  parameter int unsigned MATCHED_DELAY = ae_pkg::AE_MATCHED_DELAY
) (
  input  logic              clk,
  input  logic              rst,
  input  ae_mode_e          t_r,
  // events from the chip core
  input  logic              in_req,
  output logic              in_ack,
  input  logic [DATA_W-1:0] in_data,
  // events to the chip core
  output logic              out_req,
  input  logic              out_ack,
  output logic [DATA_W-1:0] out_data,
  // switch protocol, cross-wired to the linked block
  input  logic              sw_req,
  output logic              sw_ack,
  // shared bus, pad side
  output logic              bus_req_o,
  output logic              bus_req_oe,
  input  logic              bus_req_i,
  output logic              bus_ack_o,
  output logic              bus_ack_oe,
  input  logic              bus_ack_i,
  output logic [DATA_W-1:0] data_o,
  output logic [DATA_W-1:0] data_oe,
  input  logic [DATA_W-1:0] data_i,
  // status
  output logic              tx_en,
  output logic              rx_en,
  output logic              rx_p,
  output logic              tx_p
);

  logic              tx_in_req, tx_in_ack;
  logic [DATA_W-1:0] tx_in_data;
  logic              tx_out_req, tx_out_ack;
  logic [DATA_W-1:0] tx_out_data;
  logic              rx_in_req, rx_in_ack;
  logic [DATA_W-1:0] rx_in_data;
  logic              rx_out_req, rx_out_ack;
  logic [DATA_W-1:0] rx_out_data_t, rx_out_data_f;

  tx_fifo #(.DATA_W(DATA_W), .DEPTH(FIFO_DEPTH)) u_tx_fifo (
    .clk        (clk),
    .rst        (rst),
    .in_req     (in_req),
    .in_ack     (in_ack),
    .in_data    (in_data),
    .tx_in_req  (tx_in_req),
    .tx_in_ack  (tx_in_ack),
    .tx_in_data (tx_in_data)
  );

  tx_buffer #(.DATA_W(DATA_W), .MATCHED_DELAY(MATCHED_DELAY)) u_tx_buffer (
    .clk         (clk),
    .rst         (rst),
    .sw_req      (sw_req),
    .tx_en       (tx_en),
    .tx_in_req   (tx_in_req),
    .tx_in_ack   (tx_in_ack),
    .tx_in_data  (tx_in_data),
    .tx_out_req  (tx_out_req),
    .tx_out_ack  (tx_out_ack),
    .tx_out_data (tx_out_data)
  );

  sw_control u_sw_control (
    .clk       (clk),
    .rst       (rst),
    .t_r       (t_r),
    .sw_req    (sw_req),
    .tx_in_req (tx_in_req),
    .tx_in_ack (tx_in_ack),
    .rx_in_req (rx_in_req),
    .sw_ack    (sw_ack),
    .tx_en     (tx_en),
    .rx_en     (rx_en),
    .rx_p      (rx_p),
    .tx_p      (tx_p)
  );

  rx_buffer #(.DATA_W(DATA_W)) u_rx_buffer (
    .clk           (clk),
    .rst           (rst),
    .rx_en         (rx_en),
    .rx_in_req     (rx_in_req),
    .rx_in_ack     (rx_in_ack),
    .rx_in_data    (rx_in_data),
    .rx_out_req    (rx_out_req),
    .rx_out_ack    (rx_out_ack),
    .rx_out_data_t (rx_out_data_t),
    .rx_out_data_f (rx_out_data_f)
  );

  rx_fifo #(.DATA_W(DATA_W), .DEPTH(FIFO_DEPTH)) u_rx_fifo (
    .clk           (clk),
    .rst           (rst),
    .rx_out_req    (rx_out_req),
    .rx_out_ack    (rx_out_ack),
    .rx_out_data_t (rx_out_data_t),
    .rx_out_data_f (rx_out_data_f),
    .out_req       (out_req),
    .out_ack       (out_ack),
    .out_data      (out_data)
  );

  ae_bus_buffers #(.DATA_W(DATA_W)) u_bus (
    .tx_en       (tx_en),
    .rx_en       (rx_en),
    .tx_out_req  (tx_out_req),
    .tx_out_ack  (tx_out_ack),
    .tx_out_data (tx_out_data),
    .rx_in_req   (rx_in_req),
    .rx_in_ack   (rx_in_ack),
    .rx_in_data  (rx_in_data),
    .bus_req_o   (bus_req_o),
    .bus_req_oe  (bus_req_oe),
    .bus_req_i   (bus_req_i),
    .bus_ack_o   (bus_ack_o),
    .bus_ack_oe  (bus_ack_oe),
    .bus_ack_i   (bus_ack_i),
    .data_o      (data_o),
    .data_oe     (data_oe),
    .data_i      (data_i)
  );

endmodule
