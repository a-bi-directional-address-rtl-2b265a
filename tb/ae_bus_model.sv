// Behavioural model of one shared line group of the inter-chip AER link.
//
// Two IO cells, one per chip, each with a value and a drive enable, share a
// wire. The wire carries the value of whichever side drives it and reads 0
// when neither does (a weak pull-down). Both sides driving at once is bus
// contention, which the link protocol must never produce; it is counted and
// flagged on the contention output for the testbench to check.
module ae_bus_model #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] a_o,
  input  logic [W-1:0] a_oe,
  input  logic [W-1:0] b_o,
  input  logic [W-1:0] b_oe,
  output logic [W-1:0] wire_v,
  output logic         contention
);

  assign wire_v     = (a_o & a_oe) | (b_o & b_oe);
  assign contention = |(a_oe & b_oe);

endmodule
