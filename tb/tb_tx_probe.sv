// Self-checking test of tx_probe. Random tx_in_req, tx_in_ack and sw_req are
// applied for many cycles; a reference written from the block's rules (a flag
// set by "req while partner free", cleared by "req withdrawn", ORed with the
// acknowledge) predicts tx_p every cycle. Directed cases check that an event
// offered after the partner asked does not raise tx_p.
module tb_tx_probe;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tx_in_req = 0, tx_in_ack = 0, sw_req = 0, tx_p;
  tx_probe dut (.clk, .rst, .tx_in_req, .tx_in_ack, .sw_req, .tx_p);

  bit pend_ref;
  always @(posedge clk) begin
    if (rst) pend_ref <= 0;
    else if (tx_in_req && !sw_req) pend_ref <= 1;
    else if (!tx_in_req) pend_ref <= 0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk);
    check(tx_p == 0, "reset value");
    // directed: event accepted while partner free
    tx_in_req = 1; @(negedge clk);
    check(tx_p == 1, "event in flight");
    sw_req = 1; @(negedge clk);
    check(tx_p == 1, "stays while partner asks");
    tx_in_req = 0; tx_in_ack = 1; @(negedge clk);
    check(tx_p == 1, "held by tx_in_ack");
    tx_in_ack = 0; @(negedge clk);
    check(tx_p == 0, "handshake finished");
    // directed: event offered after the partner asked
    tx_in_req = 1; repeat (3) @(negedge clk);
    check(tx_p == 0, "event after request not counted");
    sw_req = 0; @(negedge clk);
    check(tx_p == 1, "counted once partner free");
    tx_in_req = 0; @(negedge clk);
    // random
    for (int i = 0; i < 2000; i++) begin
      tx_in_req = $urandom_range(0, 1);
      tx_in_ack = $urandom_range(0, 1);
      sw_req    = ($urandom % 4) == 0;
      @(negedge clk);
      check(tx_p == (pend_ref | tx_in_ack), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
