// Replays the measured operating cases of the bi-directional link on two
// transceivers at their default sizes, checking the latencies in cycles:
//   A. the link is reset in the right-to-left direction, then the left side
//      streams events continuously: the first direction switch, the delay
//      from the switch to the first bus request, the request-to-acknowledge
//      delay on the bus and the request-to-request period are checked;
//   B. both sides stream at once, so the bus turns round after every event:
//      the period between two requests from opposite sides is checked;
//   C. the link is reset the other way (left transmits), and a single event
//      appears on the right: the right asks, the left lets go, the event
//      crosses; then a single event from the left turns the bus back.
// Expected values follow from the register chain of each handshake (one cycle
// per state-holding node), worked out by hand:
//   switch grant (partner's sw_ack falls after our sw_ack rose) : 1
//   mode change to first bus request (matched delay)            : 1
//   bus request to bus acknowledge (rails, validity, ack)       : 3
//   request to request, one direction or alternating            : 12
// The link is rebuilt by a new reset between cases A/B and C; t_r is changed
// while reset is held.
module tb_ae_workloads;
  import ae_pkg::*;

  localparam int W = AE_WIDTH;
  localparam int NSTREAM = 20;
  localparam int EXP_T_SW = 1;
  localparam int EXP_T_SW2REQ = AE_MATCHED_DELAY;
  localparam int EXP_T_REQ2ACK = 3;
  localparam int EXP_T_REQ2REQ = 12;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  ae_mode_e     t_rL = MODE_RX, t_rR = MODE_TX;
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
    .clk (clk), .rst (rst), .t_r (t_rL),
    .in_req (inL_req), .in_ack (inL_ack), .in_data (inL_data),
    .out_req (outL_req), .out_ack (outL_ack), .out_data (outL_data),
    .sw_req (sw_ackR), .sw_ack (sw_ackL),
    .bus_req_o (reqL_o), .bus_req_oe (reqL_oe), .bus_req_i (bus_req),
    .bus_ack_o (ackL_o), .bus_ack_oe (ackL_oe), .bus_ack_i (bus_ack),
    .data_o (dL_o), .data_oe (dL_oe), .data_i (bus_data),
    .tx_en (tx_enL), .rx_en (rx_enL), .rx_p (rx_pL), .tx_p (tx_pL)
  );

  ae_transceiver u_right (
    .clk (clk), .rst (rst), .t_r (t_rR),
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
  logic [W-1:0] srcL_q[$], srcR_q[$], expL_q[$], expR_q[$];
  int rcvL = 0, rcvR = 0, n_contention = 0;

  always @(posedge clk) begin
    if (rst) begin
      inL_req <= 0; inR_req <= 0; inL_data <= '0; inR_data <= '0;
      outL_ack <= 0; outR_ack <= 0;
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

      if (outL_req && !outL_ack) begin
        outL_ack <= 1;
        checks++;
        if (expL_q.size() == 0 || outL_data != expL_q[0]) begin
          failures++;
          $display("FAIL left received %h", outL_data);
        end
        if (expL_q.size()) void'(expL_q.pop_front());
        rcvL++;
      end else if (!outL_req && outL_ack) outL_ack <= 0;
      if (outR_req && !outR_ack) begin
        outR_ack <= 1;
        checks++;
        if (expR_q.size() == 0 || outR_data != expR_q[0]) begin
          failures++;
          $display("FAIL right received %h", outR_data);
        end
        if (expR_q.size()) void'(expR_q.pop_front());
        rcvR++;
      end else if (!outR_req && outR_ack) outR_ack <= 0;
    end
  end

  // ------------------------------------------------ edge time stamps
  int unsigned req_t[$], ack_t[$];
  bit          req_l[$];
  int unsigned swL_up[$], swL_dn[$], swR_up[$], swR_dn[$], enL_up[$], enR_up[$];
  logic bus_req_d, bus_ack_d, sw_ackL_d, sw_ackR_d, tx_enL_d, tx_enR_d;
  always @(posedge clk) begin
    bus_req_d <= bus_req; bus_ack_d <= bus_ack;
    sw_ackL_d <= sw_ackL; sw_ackR_d <= sw_ackR;
    tx_enL_d  <= tx_enL;  tx_enR_d  <= tx_enR;
    if (!rst) begin
      if (bus_req && !bus_req_d) begin req_t.push_back(cycle); req_l.push_back(reqL_oe); end
      if (bus_ack && !bus_ack_d) ack_t.push_back(cycle);
      if (sw_ackL && !sw_ackL_d) swL_up.push_back(cycle);
      if (!sw_ackL && sw_ackL_d) swL_dn.push_back(cycle);
      if (sw_ackR && !sw_ackR_d) swR_up.push_back(cycle);
      if (!sw_ackR && sw_ackR_d) swR_dn.push_back(cycle);
      if (tx_enL && !tx_enL_d) enL_up.push_back(cycle);
      if (tx_enR && !tx_enR_d) enR_up.push_back(cycle);
      if (c_req || c_ack || c_data || (tx_enL && tx_enR)) n_contention++;
    end
  end

  task automatic check_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: %0d cycles, expected %0d", what, got, exp);
    end else
      $display("%s: %0d cycles", what, got);
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

  task automatic clear_stamps();
    req_t.delete(); req_l.delete(); ack_t.delete();
    swL_up.delete(); swL_dn.delete(); swR_up.delete(); swR_dn.delete();
    enL_up.delete(); enR_up.delete();
  endtask

  task automatic do_reset(input ae_mode_e l, input ae_mode_e r);
    rst = 1'b1;
    t_rL = l;
    t_rR = r;
    repeat (4) @(posedge clk);
    rst = 1'b0;
    repeat (4) @(posedge clk);
    clear_stamps();
  endtask

  initial begin
    // ---------------- A: reset right-to-left, continuous stream from left
    do_reset(MODE_RX, MODE_TX);
    checks++;
    if (!(tx_enR && rx_enL)) begin failures++; $display("FAIL reset direction A"); end
    for (int i = 0; i < NSTREAM; i++) srcL_q.push_back(W'($urandom));
    wait_drain();
    checks++;
    if (swL_up.size() != 1 || swR_dn.size() != 1 || enL_up.size() != 1 ||
        req_t.size() != NSTREAM) begin
      failures++;
      $display("FAIL case A edge counts");
    end else begin
      check_eq(swR_dn[0] - swL_up[0], EXP_T_SW, "A t_sw (request to grant)");
      check_eq(req_t[0] - enL_up[0], EXP_T_SW2REQ, "A t_sw2req");
      for (int i = 0; i < NSTREAM; i++)
        check_eq(ack_t[i] - req_t[i], EXP_T_REQ2ACK, $sformatf("A t_req2ack #%0d", i));
      for (int i = 2; i < NSTREAM; i++)
        check_eq(req_t[i] - req_t[i-1], EXP_T_REQ2REQ, $sformatf("A t_req2req #%0d", i));
    end

    // ---------------- B: both sides stream at once
    clear_stamps();
    for (int i = 0; i < NSTREAM; i++) begin
      srcL_q.push_back(W'($urandom));
      srcR_q.push_back(W'($urandom));
    end
    wait_drain();
    checks++;
    if (req_t.size() != 2 * NSTREAM) begin
      failures++;
      $display("FAIL case B request count %0d", req_t.size());
    end else
      for (int i = 3; i < 2 * NSTREAM - 2; i++) begin
        checks++;
        if (req_l[i] == req_l[i-1]) begin
          failures++;
          $display("FAIL case B direction did not turn at event %0d", i);
        end
        check_eq(req_t[i] - req_t[i-1], EXP_T_REQ2REQ, $sformatf("B two-direction req2req #%0d", i));
      end

    // ---------------- C: reset left-to-right, single events from each side
    do_reset(MODE_TX, MODE_RX);
    checks++;
    if (!(tx_enL && rx_enR && rx_pR && !rx_pL)) begin failures++; $display("FAIL reset direction C"); end
    srcR_q.push_back(W'($urandom));
    wait_drain();
    checks++;
    if (swR_up.size() != 1 || swL_dn.size() != 1 || enR_up.size() != 1 ||
        req_t.size() != 1 || req_l[0]) begin
      failures++;
      $display("FAIL case C first event edges");
    end else begin
      check_eq(swL_dn[0] - swR_up[0], EXP_T_SW, "C t_sw (request to grant)");
      check_eq(req_t[0] - enR_up[0], EXP_T_SW2REQ, "C t_sw2req");
      check_eq(ack_t[0] - req_t[0], EXP_T_REQ2ACK, "C t_req2ack");
    end
    clear_stamps();
    srcL_q.push_back(W'($urandom));
    wait_drain();
    checks++;
    if (swL_up.size() != 1 || swR_dn.size() != 1 || enL_up.size() != 1 ||
        req_t.size() != 1 || !req_l[0]) begin
      failures++;
      $display("FAIL case C return edges");
    end else begin
      check_eq(swR_dn[0] - swL_up[0], EXP_T_SW, "C t_sw back");
      check_eq(req_t[0] - enL_up[0], EXP_T_SW2REQ, "C t_sw2req back");
    end

    checks++;
    if (rcvR != NSTREAM * 2 + 1 || rcvL != NSTREAM + 1) begin
      failures++;
      $display("FAIL received counts L %0d R %0d", rcvL, rcvR);
    end
    checks++;
    if (n_contention != 0) begin failures++; $display("FAIL bus contention"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
