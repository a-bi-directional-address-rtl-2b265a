// Self-checking test of rx_probe. Both reset modes are checked (RX_P starts
// at 1 for a block reset into RX mode, 0 for TX mode); then random sw_req and
// rx_in_req are compared every cycle against a reference flag that is set by
// "request received while the partner owns the bus" and cleared whenever
// sw_req is low.
module tb_rx_probe;
  import ae_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ae_mode_e t_r = MODE_TX;
  logic sw_req = 0, rx_in_req = 0, rx_p;
  rx_probe dut (.clk, .rst, .t_r, .sw_req, .rx_in_req, .rx_p);

  bit ref_p;
  always @(posedge clk) begin
    if (rst) ref_p <= (t_r == MODE_RX);
    else if (sw_req && rx_in_req) ref_p <= 1;
    else if (!sw_req) ref_p <= 0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    @(negedge clk); @(negedge clk);
    check(rx_p == 0, "reset into TX");
    t_r = MODE_RX; @(negedge clk);
    check(rx_p == 1, "reset into RX");
    sw_req = 1; rst = 0; @(negedge clk);
    check(rx_p == 1, "holds after reset");
    sw_req = 0; @(negedge clk);
    check(rx_p == 0, "cleared in TX mode");
    sw_req = 1; repeat (3) @(negedge clk);
    check(rx_p == 0, "not set without an event");
    rx_in_req = 1; @(negedge clk);
    check(rx_p == 1, "set by received event");
    rx_in_req = 0; repeat (2) @(negedge clk);
    check(rx_p == 1, "held");
    rx_in_req = 1; sw_req = 0; @(negedge clk);
    check(rx_p == 0, "own traffic in TX mode does not count");
    for (int i = 0; i < 2000; i++) begin
      sw_req    = ($urandom % 8) != 0;
      rx_in_req = ($urandom % 4) == 0;
      @(negedge clk);
      check(rx_p == ref_p, "random");
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
