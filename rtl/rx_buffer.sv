// RX_Buffer: PCHB input stage that takes an event from the shared bus and
// hands it on in dual-rail form.
//
// The bus side is bundled data (rx_in_req/rx_in_ack/rx_in_data); the output
// side is dual-rail, one true and one false rail per bit, with rx_out_req as
// the validity signal and rx_out_ack from the RX FIFO. Its parts follow the
// paper's RX_Buffer:
//   (1) rx_in_v = RX_EN AND rx_in_req; rx_in_ack rises when rx_in_v, en and
//       the output validity out_v are high, and falls when rx_in_v and en
//       are both low;
//   (2) en falls when rx_in_ack rises and comes back when rx_in_ack and
//       out_v are both low;
//   (3) false rails and (4) true rails: evaluated while en and rx_in_v are
//       high and the RX FIFO has not acknowledged; pre-charged to 0 when the
//       FIFO acknowledges and en is low;
//   (5) validity check: out_v rises when every bit has one rail high and
//       falls only when every bit is back to neutral (both rails low).
// An event is acknowledged on the bus only after it is held in the rails, and
// the bus acknowledge falls only after the sender withdrew its request.
//
// Choices of this design: the figure prints the output rails as the inputs
// of the rail stacks; here they are driven from the bus data (true rail from
// rx_in_data, false rail from its complement), which is the function the text
// gives. out_vB is read as the inverted acknowledge of the following stage.
// The combining elements of the validity tree are not labelled in the
// figure; the tree here behaves as a C-element tree (rise on all-valid, fall
// on all-neutral). Each stage takes one clock.
module rx_buffer #(
  parameter int unsigned DATA_W = ae_pkg::AE_WIDTH
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              rx_en,
  input  logic              rx_in_req,
  output logic              rx_in_ack,
  input  logic [DATA_W-1:0] rx_in_data,
  output logic              rx_out_req,     // out_v of the validity check
  input  logic              rx_out_ack,
  output logic [DATA_W-1:0] rx_out_data_t,
  output logic [DATA_W-1:0] rx_out_data_f
);

  logic rx_in_v;
  logic en;
  logic out_v;

  assign rx_in_v = rx_en && rx_in_req;

  // (1) acknowledge to the bus
  pchb_keeper u_ack (
    .clk (clk), .rst (rst), .rst_val (1'b0),
    .set (rx_in_v && en && out_v),
    .clr (!rx_in_v && !en),
    .q   (rx_in_ack)
  );

  // (2) stage enable
  pchb_keeper u_en (
    .clk (clk), .rst (rst), .rst_val (1'b1),
    .set (!out_v && !rx_in_ack),
    .clr (rx_in_ack),
    .q   (en)
  );

  // (3), (4) dual-rail data
  always_ff @(posedge clk) begin
    if (rst) begin
      rx_out_data_t <= '0;
      rx_out_data_f <= '0;
    end else if (!rx_out_ack && en && rx_in_v) begin
      rx_out_data_t <= rx_out_data_t |  rx_in_data;
      rx_out_data_f <= rx_out_data_f | ~rx_in_data;
    end else if (rx_out_ack && !en) begin
      rx_out_data_t <= '0;
      rx_out_data_f <= '0;
    end
  end

  // (5) validity check
  logic [DATA_W-1:0] bit_v;
  assign bit_v = rx_out_data_t | rx_out_data_f;

  pchb_keeper u_valid (
    .clk (clk), .rst (rst), .rst_val (1'b0),
    .set (&bit_v),
    .clr (~|bit_v),
    .q   (out_v)
  );

  assign rx_out_req = out_v;

  a_one_rail: assert property (@(posedge clk) disable iff (rst)
                               (rx_out_data_t & rx_out_data_f) == '0)
    else $error("rx_buffer: both rails of a bit are high");

  // the sender keeps request and data until acknowledged
  a_req_hold: assert property (@(posedge clk) disable iff (rst)
                               rx_in_v && !rx_in_ack |=> rx_in_req || rx_in_ack)
    else $error("rx_buffer: bus request withdrawn before acknowledge");
  a_data_stable: assert property (@(posedge clk) disable iff (rst)
                                  rx_in_v && !rx_in_ack |=> $stable(rx_in_data) || rx_in_ack)
    else $error("rx_buffer: bus data changed before acknowledge");

endmodule
