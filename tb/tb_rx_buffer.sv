// Self-checking test of rx_buffer at its default width. The test plays the
// sending chip (4-phase bundled-data events on rx_in_req/rx_in_data) and the
// RX FIFO (acknowledges the dual-rail output after a random delay). Checked:
// each event appears with true rails equal to the data and false rails equal
// to its complement, and in order; no bit ever has both rails high; the bus
// acknowledge follows the request by 3 cycles (rails, validity, acknowledge);
// requests are ignored outside RX mode; a stalled RX FIFO holds off the next
// event; the rails return to neutral between events.
module tb_rx_buffer;
  import ae_pkg::*;
  localparam int W = AE_WIDTH;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rx_en = 1, rx_in_req = 0, rx_in_ack, rx_out_req, rx_out_ack = 0;
  logic [W-1:0] rx_in_data = '0, rx_out_data_t, rx_out_data_f;
  rx_buffer dut (.clk, .rst, .rx_en, .rx_in_req, .rx_in_ack, .rx_in_data,
                 .rx_out_req, .rx_out_ack, .rx_out_data_t, .rx_out_data_f);

  logic [W-1:0] exp_q[$];
  bit fifo_stall = 0;
  int n_rcv = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // RX FIFO model
  initial begin
    forever begin
      @(negedge clk);
      if (rx_out_req && !rx_out_ack && !fifo_stall) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        checks++;
        if (exp_q.size() == 0 || rx_out_data_t != exp_q[0] || rx_out_data_f != ~exp_q[0]) begin
          failures++;
          $display("FAIL rails t=%h f=%h expected %h", rx_out_data_t, rx_out_data_f,
                   exp_q.size() ? exp_q[0] : '0);
        end
        if (exp_q.size()) void'(exp_q.pop_front());
        n_rcv++;
        rx_out_ack = 1;
      end else if (!rx_out_req && rx_out_ack) begin
        checks++;
        if (rx_out_data_t != '0 || rx_out_data_f != '0) begin
          failures++; $display("FAIL rails not neutral");
        end
        rx_out_ack = 0;
      end
    end
  end

  always @(posedge clk) if (!rst) begin
    checks++;
    if ((rx_out_data_t & rx_out_data_f) != '0) begin failures++; $display("FAIL both rails"); end
  end

  task automatic send(input logic [W-1:0] d, output int lat);
    int c = 0;
    rx_in_data = d;
    exp_q.push_back(d);
    rx_in_req = 1;
    while (!rx_in_ack) begin @(negedge clk); c++; end
    lat = c;
    rx_in_req = 0;
    rx_in_data = W'($urandom);   // bundled data: don't care once acknowledged
    while (rx_in_ack) @(negedge clk);
  endtask

  initial begin
    int lat;
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    check(!rx_in_ack && !rx_out_req, "reset state");
    send(W'($urandom), lat);
    check(lat == 3, "acknowledge latency");
    // requests outside RX mode
    rx_en = 0;
    rx_in_req = 1;
    repeat (6) @(negedge clk);
    check(!rx_in_ack && !rx_out_req, "ignored outside RX mode");
    rx_in_req = 0;
    rx_en = 1;
    repeat (8) @(negedge clk);
    // stalled FIFO: first event acknowledged, second held
    fifo_stall = 1;
    send(W'($urandom), lat);
    rx_in_data = W'($urandom);
    exp_q.push_back(rx_in_data);
    rx_in_req = 1;
    repeat (10) @(negedge clk);
    check(!rx_in_ack, "second event held while FIFO stalls");
    fifo_stall = 0;
    while (!rx_in_ack) @(negedge clk);
    rx_in_req = 0;
    while (rx_in_ack) @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      send(W'($urandom), lat);
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    check(n_rcv == 303 && exp_q.size() == 0, "all events delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
