// End-to-end test of a bi-directional AER link: two AE transceivers at their
// default sizes (26-bit events, 4-deep FIFOs, 1-cycle matched delay) joined
// by one shared bus and the cross-wired switch lines.
//
// The left block is reset into RX mode and the right one into TX mode, so the
// link starts in the right-to-left direction. The test then runs:
//   1. a left-to-right burst (needs a first direction switch), measuring the
//      switch latency and the steady event period on the bus;
//   2. a right-to-left burst;
//   3. traffic from both sides at once, measuring the per-event period when
//      the direction changes for every event;
//   4. both sides again with slow, randomly stalling receivers, so that the
//      RX FIFOs fill up.
// Every event received is compared in order with those sent by the other
// side. The test counts how often each mechanism of the design occurred
// (direction switches both ways, a switch request held off by an event in
// flight, a request held off by the RX_Probe guard, a new event held back by
// a pending switch request, TX and RX FIFO full, the first request of the
// block reset into RX mode) and counts a failure for any that never did. Bus
// contention is a failure.
module tb_ae_link;
  import ae_pkg::*;

  localparam int W      = AE_WIDTH;
  localparam int NBURST = 40;
  localparam int NBIDIR = 40;
  localparam int NSLOW  = 30;

  // Expected timing, in cycles, counted along the register chain of the
  // handshake loop: FIFO req -> tx_in_v -> tx_out_req (matched delay) ->
  // rails -> out_v -> bus ack -> tx_in_ack -> FIFO req low -> tx_in_v low ->
  // tx_out_req low -> bus ack low -> tx_in_ack low -> next FIFO req: 12.
  // With traffic from both sides the hand-over (partner's sw_ack fall, then
  // both C-elements) overlaps the last three steps, so the period stays 12.
  // Switch latency: a request on sw_req is granted one cycle later when no
  // event is in flight; the first bus request follows TX_EN after the
  // matched delay.
  localparam int EXP_P_ONE     = 12;
  localparam int EXP_P_BIDIR   = 12;
  localparam int EXP_T_SW      = 1;
  localparam int EXP_T_SW2REQ  = AE_MATCHED_DELAY;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------------------------------------------------------- DUTs
  logic         inL_req, inL_ack, outL_req, outL_ack;
  logic [W-1:0] inL_data, outL_data;
  logic         inR_req, inR_ack, outR_req, outR_ack;
  logic [W-1:0] inR_data, outR_data;
  logic         sw_ackL, sw_ackR;
  logic         reqL_o, reqL_oe, ackL_o, ackL_oe, reqR_o, reqR_oe, ackR_o, ackR_oe;
  logic [W-1:0] dL_o, dL_oe, dR_o, dR_oe;
  logic         bus_req, bus_ack;
  logic [W-1:0] bus_data;
  logic         c_req, c_ack, c_data;
  logic         tx_enL, rx_enL, rx_pL, tx_pL, tx_enR, rx_enR, rx_pR, tx_pR;

  ae_transceiver u_left (
    .clk (clk), .rst (rst), .t_r (MODE_RX),
    .in_req (inL_req), .in_ack (inL_ack), .in_data (inL_data),
    .out_req (outL_req), .out_ack (outL_ack), .out_data (outL_data),
    .sw_req (sw_ackR), .sw_ack (sw_ackL),
    .bus_req_o (reqL_o), .bus_req_oe (reqL_oe), .bus_req_i (bus_req),
    .bus_ack_o (ackL_o), .bus_ack_oe (ackL_oe), .bus_ack_i (bus_ack),
    .data_o (dL_o), .data_oe (dL_oe), .data_i (bus_data),
    .tx_en (tx_enL), .rx_en (rx_enL), .rx_p (rx_pL), .tx_p (tx_pL)
  );

  ae_transceiver u_right (
    .clk (clk), .rst (rst), .t_r (MODE_TX),
    .in_req (inR_req), .in_ack (inR_ack), .in_data (inR_data),
    .out_req (outR_req), .out_ack (outR_ack), .out_data (outR_data),
    .sw_req (sw_ackL), .sw_ack (sw_ackR),
    .bus_req_o (reqR_o), .bus_req_oe (reqR_oe), .bus_req_i (bus_req),
    .bus_ack_o (ackR_o), .bus_ack_oe (ackR_oe), .bus_ack_i (bus_ack),
    .data_o (dR_o), .data_oe (dR_oe), .data_i (bus_data),
    .tx_en (tx_enR), .rx_en (rx_enR), .rx_p (rx_pR), .tx_p (tx_pR)
  );

  ae_bus_model #(.W(1)) u_wreq (.a_o (reqL_o), .a_oe (reqL_oe),
    .b_o (reqR_o), .b_oe (reqR_oe), .wire_v (bus_req), .contention (c_req));
  ae_bus_model #(.W(1)) u_wack (.a_o (ackL_o), .a_oe (ackL_oe),
    .b_o (ackR_o), .b_oe (ackR_oe), .wire_v (bus_ack), .contention (c_ack));
  ae_bus_model #(.W(W)) u_wdat (.a_o (dL_o), .a_oe (dL_oe),
    .b_o (dR_o), .b_oe (dR_oe), .wire_v (bus_data), .contention (c_data));

  // ------------------------------------------------------ sources / sinks
  logic [W-1:0] srcL_q[$], srcR_q[$];   // events still to send
  logic [W-1:0] expL_q[$], expR_q[$];   // events each side must receive
  bit slow_sink = 0;
  int rcvL = 0, rcvR = 0;

  always @(posedge clk) begin
    if (rst) begin
      inL_req <= 0; inR_req <= 0; inL_data <= '0; inR_data <= '0;
    end else begin
      if (!inL_req && !inL_ack && srcL_q.size() > 0) begin
        inL_data <= srcL_q[0];
        expR_q.push_back(srcL_q.pop_front());
        inL_req  <= 1;
      end else if (inL_req && inL_ack) inL_req <= 0;
      if (!inR_req && !inR_ack && srcR_q.size() > 0) begin
        inR_data <= srcR_q[0];
        expL_q.push_back(srcR_q.pop_front());
        inR_req  <= 1;
      end else if (inR_req && inR_ack) inR_req <= 0;
    end
  end

  always @(posedge clk) begin
    if (rst) begin
      outL_ack <= 0; outR_ack <= 0;
    end else begin
      if (outL_req && !outL_ack && (!slow_sink || ($urandom % 32) == 0)) begin
        outL_ack <= 1;
        checks++;
        if (expL_q.size() == 0 || outL_data != expL_q[0]) begin
          failures++;
          $display("FAIL left received %h, expected %h", outL_data,
                   expL_q.size() ? expL_q[0] : '0);
        end
        if (expL_q.size()) void'(expL_q.pop_front());
        rcvL++;
      end else if (!outL_req && outL_ack) outL_ack <= 0;
      if (outR_req && !outR_ack && (!slow_sink || ($urandom % 32) == 0)) begin
        outR_ack <= 1;
        checks++;
        if (expR_q.size() == 0 || outR_data != expR_q[0]) begin
          failures++;
          $display("FAIL right received %h, expected %h", outR_data,
                   expR_q.size() ? expR_q[0] : '0);
        end
        if (expR_q.size()) void'(expR_q.pop_front());
        rcvR++;
      end else if (!outR_req && outR_ack) outR_ack <= 0;
    end
  end

  // ------------------------------------------------ mechanism counters
  int n_sw_to_l = 0, n_sw_to_r = 0, n_hold_txp = 0, n_hold_rxp = 0;
  int n_block_new = 0, n_txf_full = 0, n_rxf_full = 0, n_contention = 0;
  int n_first_req = 0;
  logic tx_enL_d, tx_enR_d;
  always @(posedge clk) begin
    tx_enL_d <= tx_enL;
    tx_enR_d <= tx_enR;
    if (!rst) begin
      if (tx_enL && !tx_enL_d) n_sw_to_l++;
      if (tx_enR && !tx_enR_d) n_sw_to_r++;
      // partner asks, but this block still has an event in flight
      if ((sw_ackR && sw_ackL && tx_enL && tx_pL) ||
          (sw_ackL && sw_ackR && tx_enR && tx_pR)) n_hold_txp++;
      // event waiting in RX mode, but nothing received yet since the switch
      if ((rx_enL && u_left.tx_in_req && !rx_pL) ||
          (rx_enR && u_right.tx_in_req && !rx_pR)) n_hold_rxp++;
      // new event held back because the partner asked for the bus
      if ((tx_enL && u_left.tx_in_req && sw_ackR && !u_left.u_tx_buffer.tx_in_v) ||
          (tx_enR && u_right.tx_in_req && sw_ackL && !u_right.u_tx_buffer.tx_in_v))
        n_block_new++;
      if (u_left.u_tx_fifo.count == AE_FIFO_DEPTH || u_right.u_tx_fifo.count == AE_FIFO_DEPTH)
        n_txf_full++;
      if (u_left.u_rx_fifo.count == AE_FIFO_DEPTH || u_right.u_rx_fifo.count == AE_FIFO_DEPTH)
        n_rxf_full++;
      if (c_req || c_ack || c_data) n_contention++;
      if (tx_enL && tx_enR) n_contention++;
    end
  end

  // ------------------------------------------------ timing measurements
  int unsigned rise_t[$];        // cycles of bus_req rising edges
  bit          rise_l[$];        // 1: driven by the left block
  logic bus_req_d;
  always @(posedge clk) begin
    bus_req_d <= bus_req;
    if (!rst && bus_req && !bus_req_d) begin
      rise_t.push_back(cycle);
      rise_l.push_back(reqL_oe);
    end
  end

  int unsigned t_swreq, t_swack, t_txen, t_firstreq;
  bit got_txen = 0, got_firstreq = 0;
  always @(posedge clk) begin
    if (!rst && n_first_req > 0 && tx_enL && !got_txen) begin
      got_txen = 1;
      t_txen   = cycle;
    end
    if (!rst && got_txen && reqL_o && !got_firstreq) begin
      got_firstreq = 1;
      t_firstreq   = cycle;
    end
  end
  logic sw_ackL_d, sw_ackR_d;
  always @(posedge clk) begin
    sw_ackL_d <= sw_ackL;
    sw_ackR_d <= sw_ackR;
    if (!rst && sw_ackL && !sw_ackL_d && n_first_req == 0) begin
      n_first_req++;
      t_swreq = cycle;
    end
    if (!rst && !sw_ackR && sw_ackR_d && n_first_req == 1) begin
      t_swack = cycle;
      n_first_req++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic wait_drain();
    int guard = 0;
    while ((srcL_q.size() || srcR_q.size() || expL_q.size() || expR_q.size() ||
            inL_req || inR_req || outL_req || outR_req) && guard < 20000) begin
      @(posedge clk);
      guard++;
    end
    repeat (20) @(posedge clk);
  endtask

  // steady period of rises from index a to b (excluded), all intervals equal?
  task automatic check_period(input int a, input int b, input int exp_p, input string what);
    for (int i = a + 1; i < b; i++) begin
      checks++;
      if (rise_t[i] - rise_t[i-1] != exp_p) begin
        failures++;
        $display("FAIL %s: interval %0d at event %0d, expected %0d", what,
                 rise_t[i] - rise_t[i-1], i, exp_p);
      end
    end
  endtask

  initial begin
    int r0, r1;
    repeat (4) @(posedge clk);
    rst = 1'b0;
    repeat (4) @(posedge clk);
    check(tx_enR && rx_enL && !tx_enL && !rx_enR, "reset modes");
    check(rx_pL && !rx_pR, "reset values of RX_P");

    // 1. left-to-right burst
    r0 = rise_t.size();
    for (int i = 0; i < NBURST; i++) srcL_q.push_back(W'($urandom));
    wait_drain();
    r1 = rise_t.size();
    check(r1 - r0 == NBURST, "left burst event count on bus");
    check(t_swack - t_swreq == EXP_T_SW, "switch latency");
    $display("switch latency %0d cycles", t_swack - t_swreq);
    check(t_firstreq - t_txen == EXP_T_SW2REQ, "mode switch to first request");
    $display("switch to first request %0d cycles", t_firstreq - t_txen);
    check_period(r0 + 2, r1, EXP_P_ONE, "one-direction period");
    $display("one-direction period %0d cycles", rise_t[r1-1] - rise_t[r1-2]);

    // 2. right-to-left burst
    r0 = rise_t.size();
    for (int i = 0; i < NBURST; i++) srcR_q.push_back(W'($urandom));
    wait_drain();
    r1 = rise_t.size();
    check(r1 - r0 == NBURST, "right burst event count on bus");
    check_period(r0 + 2, r1, EXP_P_ONE, "one-direction period (R->L)");

    // 3. both directions at once
    r0 = rise_t.size();
    for (int i = 0; i < NBIDIR; i++) begin
      srcL_q.push_back(W'($urandom));
      srcR_q.push_back(W'($urandom));
    end
    wait_drain();
    r1 = rise_t.size();
    check(r1 - r0 == 2 * NBIDIR, "bi-directional event count on bus");
    for (int i = r0 + 4; i < r1 - 4; i++) begin
      checks++;
      if (rise_l[i] == rise_l[i-1]) begin
        failures++;
        $display("FAIL direction did not alternate at event %0d", i);
      end
    end
    check_period(r0 + 4, r1 - 4, EXP_P_BIDIR, "bi-directional period");
    $display("bi-directional period %0d cycles", rise_t[r0+10] - rise_t[r0+9]);

    // 4. both directions, slow receivers
    slow_sink = 1;
    for (int i = 0; i < NSLOW; i++) begin
      srcL_q.push_back(W'($urandom));
      srcR_q.push_back(W'($urandom));
    end
    wait_drain();
    slow_sink = 0;

    check(rcvR == NBURST + NBIDIR + NSLOW, "events received by right");
    check(rcvL == NBURST + NBIDIR + NSLOW, "events received by left");
    check(n_contention == 0, "no bus contention, never both in TX");
    check(n_sw_to_l > 0, "switch to left TX happened");
    check(n_sw_to_r > 0, "switch to right TX happened");
    check(n_hold_txp > 0, "switch grant held by event in flight happened");
    check(n_hold_rxp > 0, "switch request held by RX_Probe guard happened");
    check(n_block_new > 0, "new event held back by switch request happened");
    check(n_txf_full > 0, "TX FIFO full happened");
    check(n_rxf_full > 0, "RX FIFO full happened");
    check(n_first_req > 0, "request straight after reset happened");
    $display("switches to L %0d to R %0d, hold_txp %0d, hold_rxp %0d, block_new %0d, txf_full %0d, rxf_full %0d",
             n_sw_to_l, n_sw_to_r, n_hold_txp, n_hold_rxp, n_block_new, n_txf_full, n_rxf_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
