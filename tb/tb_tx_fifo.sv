// Self-checking test of tx_fifo at its default sizes. The test plays
// the chip core on the input side and the TX_Buffer on the output side, with random gaps on both sides.
// Checked: events come out in the order they went in with their data; an
// empty FIFO offers an event 2 cycles after accepting it; with the output
// side stalled the FIFO accepts exactly DEPTH+1 events (DEPTH slots plus the
// output register) and then holds off the next one until a place is free.
module tb_tx_fifo;
  import ae_pkg::*;
  localparam int W = AE_WIDTH;
  localparam int D = AE_FIFO_DEPTH;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_req = 0, in_ack, tx_in_req, tx_in_ack = 0;
  logic [W-1:0] in_data = '0, tx_in_data;
  tx_fifo dut (.clk, .rst, .in_req, .in_ack, .in_data, .tx_in_req, .tx_in_ack, .tx_in_data);

  logic [W-1:0] exp_q[$];
  logic [W-1:0] last_d;
  bit stall = 0, slow = 0;
  int n_out = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // output side
  initial begin
    forever begin
      @(negedge clk);
      if (tx_in_req && !tx_in_ack && !stall && (!slow || ($urandom % 4) == 0)) begin
        checks++;
        if (exp_q.size() == 0 || tx_in_data != exp_q[0]) begin
          failures++;
          $display("FAIL out %h expected %h", tx_in_data, exp_q.size() ? exp_q[0] : '0);
        end
        if (exp_q.size()) void'(exp_q.pop_front());
        n_out++;
        tx_in_ack = 1;
      end else if (!tx_in_req && tx_in_ack) begin
        tx_in_ack = 0;
      end
    end
  end

  task automatic push(input logic [W-1:0] d, input int max_wait, output bit ok);
    int c = 0;
    last_d = d;
    in_data = d;
    in_req = 1;
    while (!in_ack && c < max_wait) begin @(negedge clk); c++; end
    ok = in_ack;
    if (ok) begin
      exp_q.push_back(d);
      in_req = 0;
      in_data = W'($urandom);
      while (in_ack) @(negedge clk);
    end
  endtask

  initial begin
    bit ok;
    int lat;
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    check(!tx_in_req && !in_ack, "reset state");
    // latency through an empty FIFO
    stall = 1;
    begin
      logic [W-1:0] d;
      d = W'($urandom);
      in_data = d;
      exp_q.push_back(d);
    end
    in_req = 1;
    lat = 0;
    while (!tx_in_req) begin @(negedge clk); lat++; end
    check(lat == 2, "latency through empty FIFO");
    while (!in_ack) @(negedge clk);
    in_req = 0;
    while (in_ack) @(negedge clk);
    // capacity with the output stalled: one already held, D more fit
    for (int i = 0; i < D; i++) begin
      push(W'($urandom), 20, ok);
      check(ok, "accepted while not full");
    end
    push(W'($urandom), 20, ok);
    check(!ok, "held off when full");
    exp_q.push_back(last_d);
    stall = 0;
    while (!in_ack) @(negedge clk);
    in_req = 0;
    while (in_ack) @(negedge clk);
    repeat (40) @(negedge clk);
    // random traffic
    slow = 1;
    for (int i = 0; i < 400; i++) begin
      if (i == 200) slow = 0;
      push(W'($urandom), 1000, ok);
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    repeat (60) @(negedge clk);
    check(exp_q.size() == 0, "all events out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
