// RX_FIFO: output FIFO between the RX_Buffer and the chip's AER event sink.
//
// The input side takes the RX_Buffer's dual-rail event: when the validity
// signal rx_out_req is high and a slot is free, the true rails are stored and
// rx_out_ack is raised; rx_out_ack falls once the RX_Buffer has returned all
// rails to neutral and dropped rx_out_req. The output side offers the oldest
// event to the chip core with a 4-phase bundled-data handshake
// (out_req/out_ack/out_data), like the TX FIFO. A full FIFO delays
// rx_out_ack, which stalls the RX_Buffer and in turn the bus acknowledge.
//
// The paper states that the RX_Buffer and the following RX_FIFO stage use
// dual-rail coding, and that the FIFOs are added for throughput; the depth and
// the clocked organisation are this design's own. Holds up to DEPTH+1 events.
module rx_fifo #(
  parameter int unsigned DATA_W = ae_pkg::AE_WIDTH,
  parameter int unsigned DEPTH  = ae_pkg::AE_FIFO_DEPTH
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              rx_out_req,
  output logic              rx_out_ack,
  input  logic [DATA_W-1:0] rx_out_data_t,
  input  logic [DATA_W-1:0] rx_out_data_f,
  output logic              out_req,
  input  logic              out_ack,
  output logic [DATA_W-1:0] out_data
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DATA_W-1:0] mem [DEPTH];
  logic [AW-1:0]     wptr, rptr;
  logic [AW:0]       count;
  logic              push, pop;

  assign push = rx_out_req && !rx_out_ack && (count < (AW+1)'(DEPTH));
  assign pop  = !out_req && !out_ack && (count != '0);

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= rx_out_data_t;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      rx_out_ack <= 1'b0;
      out_req    <= 1'b0;
      out_data   <= '0;
    end else begin
      if (push) begin
        wptr       <= next_ptr(wptr);
        rx_out_ack <= 1'b1;
      end else if (!rx_out_req) begin
        rx_out_ack <= 1'b0;
      end
      if (pop) begin
        rptr     <= next_ptr(rptr);
        out_data <= mem[rptr];
        out_req  <= 1'b1;
      end else if (out_req && out_ack) begin
        out_req  <= 1'b0;
      end
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_dual_rail: assert property (@(posedge clk) disable iff (rst)
                                push |-> ((rx_out_data_t ^ rx_out_data_f) == '1))
    else $error("rx_fifo: stored an event whose rails are not all valid");

  a_out_ack: assert property (@(posedge clk) disable iff (rst)
                              $rose(out_ack) |-> out_req)
    else $error("rx_fifo: out_ack rose without a request");

endmodule
