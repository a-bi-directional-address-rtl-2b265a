// Bi-directional bus buffers of the AE transceiver.
//
// Each shared line (bus_req, bus_ack and the data bits) has an output driver
// and an input receiver, as in a standard digital IO cell configured by the
// mode signals. In TX mode the TX_Buffer drives bus_req and the data lines
// and listens to bus_ack; in RX mode the RX_Buffer drives bus_ack and listens
// to bus_req and the data. The pad side is split into value (_o), output
// enable (_oe) and received value (_i), so the IO cell or tri-state wire sits
// outside this module. A receiver whose line is currently driven by this
// block reads 0, so a block never sees its own requests. Purely
// combinational.
//
// The mapping of each terminal to TX_EN or RX_EN follows the paper's
// architecture figure; splitting the pad into o/oe/i and forcing disabled
// inputs to 0 are this design's choices.
module ae_bus_buffers #(
  parameter int unsigned DATA_W = ae_pkg::AE_WIDTH
) (
  input  logic              tx_en,
  input  logic              rx_en,
  // TX_Buffer side
  input  logic              tx_out_req,
  output logic              tx_out_ack,
  input  logic [DATA_W-1:0] tx_out_data,
  // RX_Buffer side
  output logic              rx_in_req,
  input  logic              rx_in_ack,
  output logic [DATA_W-1:0] rx_in_data,
  // pad side
  output logic              bus_req_o,
  output logic              bus_req_oe,
  input  logic              bus_req_i,
  output logic              bus_ack_o,
  output logic              bus_ack_oe,
  input  logic              bus_ack_i,
  output logic [DATA_W-1:0] data_o,
  output logic [DATA_W-1:0] data_oe,
  input  logic [DATA_W-1:0] data_i
);

  always_comb begin
    bus_req_o  = tx_en && tx_out_req;
    bus_req_oe = tx_en;
    data_o     = tx_en ? tx_out_data : '0;
    data_oe    = {DATA_W{tx_en}};
    bus_ack_o  = rx_en && rx_in_ack;
    bus_ack_oe = rx_en;

    tx_out_ack = tx_en && bus_ack_i;
    rx_in_req  = rx_en && bus_req_i;
    rx_in_data = rx_en ? data_i : '0;
  end

endmodule
