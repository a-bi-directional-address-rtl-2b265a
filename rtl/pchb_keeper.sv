// Dynamic node with keeper, the state element every PCHB gate is built from.
//
// A dynamic gate has a pull-down stack that drives its node low and a pull-up
// stack that drives it high; when neither conducts, a weak keeper inverter
// holds the last value. The logical output q is the inverted node, so:
//   set = 1 (pull-down conducts)  -> q becomes 1
//   clr = 1 (pull-up conducts)    -> q becomes 0
//   neither                       -> q holds
// Both stacks conducting at once would be a short circuit in silicon; an
// assertion flags it. q changes one clock after the stack that drives it.
// Synchronous reset loads rst_val (the SRst/PRst branches of the circuits).
module pchb_keeper (
  input  logic clk,
  input  logic rst,
  input  logic rst_val,
  input  logic set,
  input  logic clr,
  output logic q
);

  always_ff @(posedge clk) begin
    if (rst)      q <= rst_val;
    else if (set) q <= 1'b1;
    else if (clr) q <= 1'b0;
  end

  a_no_short: assert property (@(posedge clk) disable iff (rst) !(set && clr))
    else $error("pchb_keeper: pull-up and pull-down stacks conduct together");

endmodule
