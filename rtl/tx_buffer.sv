// TX_Buffer: 4-phase bundled-data PCHB stage that drives one event onto the
// shared bus.
//
// Inputs come from the TX FIFO (tx_in_req/tx_in_ack/tx_in_data), outputs go
// to the bus buffers (tx_out_req/tx_out_ack/tx_out_data). Its five parts are
// those of the paper's TX_Buffer:
//   (1) tx_in_v rises when tx_in_req is high and the linked block is free
//       (sw_req low) and falls when tx_in_req falls;
//   (2) en, the stage enable, falls when tx_in_ack rises and comes back when
//       both tx_in_ack and the (TX_EN-qualified) bus acknowledge are low;
//   (3) tx_in_ack rises when tx_in_v, en and the bus acknowledge are all
//       high, and falls when all three are low;
//   (4) a matched delay of MATCHED_DELAY cycles from tx_in_v to tx_out_req,
//       so the request never overtakes its data;
//   (5) one dynamic latch per data bit, evaluated while en and tx_in_v are
//       high and the receiver has not acknowledged, and pre-charged to 0
//       once the receiver acknowledges and en has fallen.
// tx_in_ack only rises after the receiver on the other chip acknowledged, so
// the FIFO sees the full round trip over the bus.
//
// The paper's text assigns the completion check to part 2 and the enable to
// part 3, while its figure prints "en" as the output of part 2 and
// "TX_in_ack" as the output of part 3; this design follows the figure. The
// signal the figure calls Out_vB is read here as the inverted bus
// acknowledge, which is what a PCHB data stage waits on. The matched delay
// becomes a register chain, one cycle per unit of delay.
module tx_buffer #(
  parameter int unsigned DATA_W        = ae_pkg::AE_WIDTH,
  parameter int unsigned MATCHED_DELAY = ae_pkg::AE_MATCHED_DELAY
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              sw_req,       // linked block wants the bus
  input  logic              tx_en,        // this block is in TX mode
  input  logic              tx_in_req,
  output logic              tx_in_ack,
  input  logic [DATA_W-1:0] tx_in_data,
  output logic              tx_out_req,
  input  logic              tx_out_ack,
  output logic [DATA_W-1:0] tx_out_data
);

  if (MATCHED_DELAY < 1) begin : g_bad_delay
    $error("tx_buffer: MATCHED_DELAY must be at least 1");
  end

  logic tx_in_v;
  logic en;
  logic out_ack;

  assign out_ack = tx_en && tx_out_ack;

  // (1) input validity, blocked while the partner asks for the bus
  pchb_keeper u_in_v (
    .clk (clk), .rst (rst), .rst_val (1'b0),
    .set (tx_in_req && !sw_req),
    .clr (!tx_in_req),
    .q   (tx_in_v)
  );

  // (2) stage enable
  pchb_keeper u_en (
    .clk (clk), .rst (rst), .rst_val (1'b1),
    .set (!out_ack && !tx_in_ack),
    .clr (tx_in_ack),
    .q   (en)
  );

  // (3) acknowledge to the TX FIFO
  pchb_keeper u_ack (
    .clk (clk), .rst (rst), .rst_val (1'b0),
    .set (out_ack && tx_in_v && en),
    .clr (!out_ack && !tx_in_v && !en),
    .q   (tx_in_ack)
  );

  // (4) matched delay
  logic [MATCHED_DELAY-1:0] dly;
  always_ff @(posedge clk) begin
    if (rst) begin
      dly <= '0;
    end else begin
      dly[0] <= tx_in_v;
      for (int i = 1; i < MATCHED_DELAY; i++) dly[i] <= dly[i-1];
    end
  end
  assign tx_out_req = dly[MATCHED_DELAY-1];

  // (5) data latches: evaluate pulls a 1 in, pre-charge returns all to 0
  always_ff @(posedge clk) begin
    if (rst)                             tx_out_data <= '0;
    else if (!out_ack && en && tx_in_v)  tx_out_data <= tx_out_data | tx_in_data;
    else if (out_ack && !en)             tx_out_data <= '0;
  end

  // bundled data: the data must not change while the request waits for its
  // acknowledge
  a_data_stable: assert property (@(posedge clk) disable iff (rst)
                                  tx_out_req && !out_ack |=> $stable(tx_out_data) || out_ack)
    else $error("tx_buffer: data changed while the bus request was pending");
  a_fifo_hold: assert property (@(posedge clk) disable iff (rst)
                                tx_in_req && !tx_in_ack |=> tx_in_req || tx_in_ack)
    else $error("tx_buffer: tx_in_req withdrawn before tx_in_ack");

endmodule
