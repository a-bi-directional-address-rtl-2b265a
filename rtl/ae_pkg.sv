// Shared constants and types of the bi-directional AE transceiver.
//
// The transceiver is written as a cycle-based model of an asynchronous
// pre-charge half-buffer (PCHB) design: every state-holding node of the
// transistor circuits (a dynamic node with its keeper, or a C-element) is one
// register clocked by clk, and the plain gates between them are combinational.
// One clock cycle therefore stands for one gate-plus-keeper delay.
//
// The event width of 26 bits is the width the paper's chip uses on its links.
// The FIFO depth and the matched-delay length are this design's own choices.
package ae_pkg;

  // Width of one address-event on the shared bus (26-bit AER links).
  localparam int unsigned AE_WIDTH = 26;

  // Depth of the TX and RX FIFOs (not given by the paper; chosen here).
  localparam int unsigned AE_FIFO_DEPTH = 4;

  // Length of the matched delay between TX_in_v and TX_out_req, in cycles.
  // One cycle covers the one-cycle evaluation of the TX data latch.
  localparam int unsigned AE_MATCHED_DELAY = 1;

  // Mode a transceiver is reset into (the T_R input of the circuits).
  typedef enum logic {
    MODE_RX = 1'b0,
    MODE_TX = 1'b1
  } ae_mode_e;

endpackage
