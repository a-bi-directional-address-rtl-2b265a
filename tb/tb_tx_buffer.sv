// Self-checking test of tx_buffer at its default sizes. The test plays the TX
// FIFO (4-phase requests with random data) and the receiving chip (acknowledges
// tx_out_req after a random delay, checking the data it sees then). Checked:
// every event arrives with its data and in order; the request reaches the bus
// 1 + MATCHED_DELAY cycles after the FIFO offers it; a pending switch request
// (sw_req) keeps a new event off the bus; an acknowledge seen outside TX mode
// is ignored; the data lines return to zero after each event; the FIFO's
// acknowledge follows the bus acknowledge one cycle later.
module tb_tx_buffer;
  import ae_pkg::*;
  localparam int W = AE_WIDTH;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sw_req = 0, tx_en = 1, tx_in_req = 0, tx_in_ack, tx_out_req, tx_out_ack = 0;
  logic [W-1:0] tx_in_data = '0, tx_out_data;
  tx_buffer dut (.clk, .rst, .sw_req, .tx_en, .tx_in_req, .tx_in_ack, .tx_in_data,
                 .tx_out_req, .tx_out_ack, .tx_out_data);

  logic [W-1:0] exp_q[$];
  bit rx_enable = 1;
  int n_rcv = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // receiving chip
  initial begin
    forever begin
      @(negedge clk);
      if (tx_out_req && !tx_out_ack && rx_enable) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        checks++;
        if (exp_q.size() == 0 || tx_out_data != exp_q[0]) begin
          failures++;
          $display("FAIL data %h expected %h", tx_out_data, exp_q.size() ? exp_q[0] : '0);
        end
        if (exp_q.size()) void'(exp_q.pop_front());
        n_rcv++;
        tx_out_ack = 1;
      end else if (!tx_out_req && tx_out_ack) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        tx_out_ack = 0;
      end
    end
  end

  task automatic send(input logic [W-1:0] d, output int lat);
    int c = 0;
    tx_in_data = d;
    exp_q.push_back(d);
    tx_in_req = 1;
    while (!tx_out_req) begin @(negedge clk); c++; end
    lat = c;
    while (!tx_in_ack) @(negedge clk);
    tx_in_req = 0;
    while (tx_in_ack) @(negedge clk);
  endtask

  initial begin
    int lat;
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    check(!tx_out_req && !tx_in_ack && tx_out_data == '0, "reset state");
    // latency of one event
    send(W'($urandom), lat);
    check(lat == 1 + AE_MATCHED_DELAY, "request latency");
    repeat (3) @(negedge clk);
    check(tx_out_data == '0, "data returned to zero");
    // partner asks: event must wait
    sw_req = 1;
    tx_in_data = W'($urandom);
    exp_q.push_back(tx_in_data);
    tx_in_req = 1;
    repeat (6) @(negedge clk);
    check(!tx_out_req, "blocked while partner asks");
    sw_req = 0;
    lat = 0;
    while (!tx_out_req) begin @(negedge clk); lat++; end
    check(lat == 1 + AE_MATCHED_DELAY, "released after partner done");
    // acknowledge outside TX mode is ignored
    tx_en = 0;
    repeat (6) @(negedge clk);
    check(tx_out_ack && !tx_in_ack, "ack ignored outside TX mode");
    tx_en = 1;
    while (!tx_in_ack) @(negedge clk);
    tx_in_req = 0;
    while (tx_in_ack) @(negedge clk);
    // a burst of random events
    for (int i = 0; i < 300; i++) begin
      send(W'($urandom), lat);
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    check(n_rcv == 302 && exp_q.size() == 0, "all events received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // FIFO acknowledge one cycle after the bus acknowledge
  logic ack_d;
  always @(posedge clk) begin
    ack_d <= tx_out_ack && tx_en;
    if (!rst && tx_in_ack && !$past(tx_in_ack)) begin
      checks++;
      if (!ack_d) begin failures++; $display("FAIL tx_in_ack without bus ack"); end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
