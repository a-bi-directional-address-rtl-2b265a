// Self-checking test of ae_bus_buffers. Random values on every input are
// applied in both modes and each output is compared with what the mode
// prescribes: in TX mode the block drives bus_req and the data lines and
// passes bus_ack in; in RX mode it drives bus_ack and passes bus_req and
// the data in; receivers of lines the block drives itself read 0.
module tb_ae_bus_buffers;
  import ae_pkg::*;
  localparam int W = AE_WIDTH;
  int checks = 0, failures = 0;

  logic tx_en, rx_en, tx_out_req, tx_out_ack, rx_in_req, rx_in_ack;
  logic [W-1:0] tx_out_data, rx_in_data, data_o, data_oe, data_i;
  logic bus_req_o, bus_req_oe, bus_req_i, bus_ack_o, bus_ack_oe, bus_ack_i;

  ae_bus_buffers dut (.tx_en, .rx_en, .tx_out_req, .tx_out_ack, .tx_out_data,
                      .rx_in_req, .rx_in_ack, .rx_in_data, .bus_req_o, .bus_req_oe,
                      .bus_req_i, .bus_ack_o, .bus_ack_oe, .bus_ack_i, .data_o,
                      .data_oe, .data_i);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (tx_en=%0b)", what, tx_en); end
  endtask

  initial begin
    for (int i = 0; i < 1000; i++) begin
      tx_en       = $urandom_range(0, 1);
      rx_en       = !tx_en;
      tx_out_req  = $urandom_range(0, 1);
      tx_out_data = W'($urandom);
      rx_in_ack   = $urandom_range(0, 1);
      bus_req_i   = $urandom_range(0, 1);
      bus_ack_i   = $urandom_range(0, 1);
      data_i      = W'($urandom);
      #1;
      if (tx_en) begin
        check(bus_req_oe && bus_req_o == tx_out_req, "req driven");
        check(data_oe == '1 && data_o == tx_out_data, "data driven");
        check(!bus_ack_oe, "ack not driven");
        check(tx_out_ack == bus_ack_i, "ack received");
        check(!rx_in_req && rx_in_data == '0, "own req/data not seen");
      end else begin
        check(!bus_req_oe && data_oe == '0, "req/data not driven");
        check(bus_ack_oe && bus_ack_o == rx_in_ack, "ack driven");
        check(rx_in_req == bus_req_i && rx_in_data == data_i, "req/data received");
        check(!tx_out_ack, "own ack not seen");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
