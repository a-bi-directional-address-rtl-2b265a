// TX_FIFO: input FIFO between the chip's AER event source and the TX_Buffer.
//
// Both sides use 4-phase bundled-data handshakes. On the input side an event
// on in_data is stored when in_req is high and a slot is free, and in_ack is
// raised; in_ack falls after in_req falls. A full FIFO simply delays in_ack.
// On the output side the oldest event is moved to an output register and
// tx_in_req is raised; tx_in_req falls after tx_in_ack rises, and the next
// event is offered only after tx_in_ack has fallen again. The output register
// counts as one more place, so the FIFO holds up to DEPTH+1 events.
//
// The paper states only that FIFOs are added to raise throughput; the depth,
// the pointer organisation and the clocked handshakes are this design's own.
// Each handshake edge takes one clock.
module tx_fifo #(
  parameter int unsigned DATA_W = ae_pkg::AE_WIDTH,
  parameter int unsigned DEPTH  = ae_pkg::AE_FIFO_DEPTH
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_req,
  output logic              in_ack,
  input  logic [DATA_W-1:0] in_data,
  output logic              tx_in_req,
  input  logic              tx_in_ack,
  output logic [DATA_W-1:0] tx_in_data
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DATA_W-1:0] mem [DEPTH];
  logic [AW-1:0]     wptr, rptr;
  logic [AW:0]       count;
  logic              push, pop;

  assign push = in_req && !in_ack && (count < (AW+1)'(DEPTH));
  assign pop  = !tx_in_req && !tx_in_ack && (count != '0);

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      in_ack     <= 1'b0;
      tx_in_req  <= 1'b0;
      tx_in_data <= '0;
    end else begin
      if (push) begin
        wptr   <= next_ptr(wptr);
        in_ack <= 1'b1;
      end else if (!in_req) begin
        in_ack <= 1'b0;
      end
      if (pop) begin
        rptr       <= next_ptr(rptr);
        tx_in_data <= mem[rptr];
        tx_in_req  <= 1'b1;
      end else if (tx_in_req && tx_in_ack) begin
        tx_in_req  <= 1'b0;
      end
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // 4-phase rules for the two partners of the FIFO
  a_in_hold: assert property (@(posedge clk) disable iff (rst)
                              in_req && !in_ack |=> in_req || in_ack)
    else $error("tx_fifo: in_req withdrawn before in_ack");
  a_out_ack: assert property (@(posedge clk) disable iff (rst)
                              $rose(tx_in_ack) |-> tx_in_req)
    else $error("tx_fifo: tx_in_ack rose without a request");

endmodule
