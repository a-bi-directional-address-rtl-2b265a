// Self-checking test of sw_switch_ctrl. Checks the reset state for both reset
// modes, then a directed pass through the paper's mode table (request from
// RX mode, grant from TX mode, blocked request without RX_P, blocked grant
// while an event is in flight), then random inputs compared every cycle with
// a reference model of SW_ack and of the C-element that sets the mode.
module tb_sw_switch_ctrl;
  import ae_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ae_mode_e t_r = MODE_RX;
  logic sw_req = 1, tx_in_req = 0, rx_p = 0, tx_p = 0;
  logic sw_ack, tx_en, rx_en;
  sw_switch_ctrl dut (.clk, .rst, .t_r, .sw_req, .tx_in_req, .rx_p, .tx_p,
                      .sw_ack, .tx_en, .rx_en);

  bit ref_ack, ref_tx;
  always @(posedge clk) begin
    if (rst) begin
      ref_ack <= (t_r == MODE_TX);
      ref_tx  <= (t_r == MODE_TX);
    end else begin
      if (tx_in_req && !ref_tx && rx_p)      ref_ack <= 1;
      else if (sw_req && !tx_p && ref_tx)    ref_ack <= 0;
      if (!sw_req && ref_ack)                ref_tx  <= 1;
      else if (sw_req && !ref_ack)           ref_tx  <= 0;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    @(negedge clk); @(negedge clk);
    check(!sw_ack && !tx_en && rx_en, "reset into RX");
    rst = 0; @(negedge clk);
    // RX mode, event waits, but nothing received yet
    tx_in_req = 1; repeat (3) @(negedge clk);
    check(!sw_ack, "request blocked without RX_P");
    rx_p = 1; @(negedge clk);
    check(sw_ack && rx_en, "request RX->TX");
    sw_req = 0; @(negedge clk);
    check(tx_en && !rx_en, "switched to TX after grant");
    // TX mode: partner asks while an event is in flight
    tx_in_req = 0; rx_p = 0; tx_p = 1; sw_req = 1; repeat (3) @(negedge clk);
    check(sw_ack && tx_en, "grant held while event in flight");
    tx_p = 0; @(negedge clk);
    check(!sw_ack && tx_en, "grant TX->RX");
    @(negedge clk);
    check(!tx_en && rx_en, "switched to RX");
    // random
    for (int i = 0; i < 3000; i++) begin
      sw_req    = $urandom_range(0, 1);
      tx_in_req = $urandom_range(0, 1);
      rx_p      = $urandom_range(0, 1);
      tx_p      = ($urandom % 4) == 0;
      @(negedge clk);
      check(sw_ack == ref_ack && tx_en == ref_tx && rx_en == !ref_tx, "random");
    end
    // reset into TX
    rst = 1; t_r = MODE_TX; @(negedge clk);
    check(sw_ack && tx_en && !rx_en, "reset into TX");
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
