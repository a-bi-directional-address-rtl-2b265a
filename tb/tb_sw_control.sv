// Self-checking test of sw_control: two instances cross-wired as on a real
// link (each sw_ack drives the other's sw_req). A small model of the rest of
// each transceiver offers events (tx_in_req), sends one when its side is in TX
// mode and the partner is not asking, shows it to the partner's rx_in_req and
// then acknowledges it. Both sides get random amounts of traffic. Checked:
// the (SW_ackL, SW_ackR) pair only moves along the paper's mode table, the
// two blocks are never in TX mode together, no event is sent outside TX mode,
// every event is eventually delivered, a block asks for the bus only after
// it has received an event since it last sent (the RX_Probe rule), and an idle grant takes 1 cycle and a
// full hand-over 2 cycles.
module tb_sw_control;
  import ae_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] tx_in_req, tx_in_ack, rx_in_req, sw_ack, tx_en, rx_en, rx_p, tx_p;
  logic [1:0] busy, on_bus;
  int         todo [2];
  int         sent [2];
  int         phase [2];

  // side 0 = left, reset into TX; side 1 = right, reset into RX
  sw_control u_l (.clk, .rst, .t_r (MODE_TX), .sw_req (sw_ack[1]),
                  .tx_in_req (tx_in_req[0]), .tx_in_ack (tx_in_ack[0]),
                  .rx_in_req (rx_in_req[0]), .sw_ack (sw_ack[0]),
                  .tx_en (tx_en[0]), .rx_en (rx_en[0]), .rx_p (rx_p[0]), .tx_p (tx_p[0]));
  sw_control u_r (.clk, .rst, .t_r (MODE_RX), .sw_req (sw_ack[0]),
                  .tx_in_req (tx_in_req[1]), .tx_in_ack (tx_in_ack[1]),
                  .rx_in_req (rx_in_req[1]), .sw_ack (sw_ack[1]),
                  .tx_en (tx_en[1]), .rx_en (rx_en[1]), .rx_p (rx_p[1]), .tx_p (tx_p[1]));

  assign rx_in_req[0] = on_bus[1] && rx_en[0];
  assign rx_in_req[1] = on_bus[0] && rx_en[1];

  // transceiver model: 0 idle, 1 offered, 2..3 on the bus, 4 ack, 5 ack low
  always @(posedge clk) begin
    for (int s = 0; s < 2; s++) begin
      if (rst) begin
        phase[s] <= 0; tx_in_req[s] <= 0; tx_in_ack[s] <= 0; on_bus[s] <= 0; sent[s] <= 0;
      end else begin
        case (phase[s])
          0: if (todo[s] > sent[s]) begin tx_in_req[s] <= 1; phase[s] <= 1; end
          1: if (tx_en[s] && !sw_ack[1-s]) begin on_bus[s] <= 1; phase[s] <= 2; end
          2: phase[s] <= 3;
          3: begin on_bus[s] <= 0; tx_in_ack[s] <= 1; tx_in_req[s] <= 0; phase[s] <= 4; end
          4: begin tx_in_ack[s] <= 0; sent[s] <= sent[s] + 1; phase[s] <= 0; end
          default: phase[s] <= 0;
        endcase
      end
    end
  end

  // protocol checks every cycle
  logic [1:0] prev_ack;
  int n_sw = 0;
  always @(posedge clk) begin
    prev_ack <= sw_ack;
    if (!rst) begin
      checks++;
      if (tx_en == 2'b11) begin failures++; $display("FAIL both in TX at %0t", $time); end
      if (sw_ack == 2'b00) begin failures++; $display("FAIL SW_ack pair 00 at %0t", $time); end
      if (sw_ack != prev_ack) begin
        n_sw++;
        // allowed moves of the mode table: 10->11, 11->01, 01->11, 11->10
        if (!((prev_ack == 2'b01 && sw_ack == 2'b11) || (prev_ack == 2'b11 && sw_ack != 2'b11) ||
              (prev_ack == 2'b10 && sw_ack == 2'b11))) begin
          failures++; $display("FAIL move %b -> %b at %0t", prev_ack, sw_ack, $time);
        end
      end
      for (int s = 0; s < 2; s++)
        if (on_bus[s] && !tx_en[s]) begin failures++; $display("FAIL side %0d sent in RX", s); end
    end
  end

  // a request RX->TX needs an event received since the block last sent
  // (or a reset into RX mode)
  bit got_ev [2];
  always @(posedge clk) begin
    for (int s = 0; s < 2; s++) begin
      if (rst) got_ev[s] <= (s == 1);
      else begin
        if (sw_ack[s] && !prev_ack[s]) begin
          checks++;
          if (!got_ev[s]) begin failures++; $display("FAIL side %0d asked without a received event at %0t", s, $time); end
        end
        if (rx_in_req[s]) got_ev[s] <= 1;
        else if (tx_en[s]) got_ev[s] <= 0;
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int t0;
    todo[0] = 0; todo[1] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    check(sw_ack == 2'b01 && tx_en == 2'b01 && rx_p == 2'b10, "reset state");
    // right asks, left idle: grant after 1 cycle, both modes after 2
    todo[1] = 1;
    @(posedge sw_ack[1]); t0 = $time;
    @(negedge sw_ack[0]);
    check(($time - t0) / 10 == 1, "idle grant latency");
    @(posedge tx_en[1]);
    check(($time - t0) / 10 == 2, "hand-over latency");
    wait (sent[1] == 1);
    // random traffic on both sides
    for (int k = 0; k < 40; k++) begin
      todo[0] += $urandom_range(0, 4);
      todo[1] += $urandom_range(0, 4);
      repeat ($urandom_range(5, 60)) @(negedge clk);
    end
    fork
      wait (sent[0] == todo[0] && sent[1] == todo[1]);
      repeat (5000) @(negedge clk);
    join_any
    check(sent[0] == todo[0] && sent[1] == todo[1], "all events delivered");
    check(n_sw > 20, "many switches");
    $display("switch moves %0d, sent %0d/%0d", n_sw, sent[0], sent[1]);
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
