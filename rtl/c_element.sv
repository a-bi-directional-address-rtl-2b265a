// Two-input Muller C-element.
//
// The output goes to 1 when both inputs are 1, to 0 when both are 0, and
// holds otherwise. It is registered: the output follows the inputs one clock
// later. Synchronous reset loads rst_val.
module c_element (
  input  logic clk,
  input  logic rst,
  input  logic rst_val,
  input  logic a,
  input  logic b,
  output logic q
);

  always_ff @(posedge clk) begin
    if (rst)             q <= rst_val;
    else if (a && b)     q <= 1'b1;
    else if (!a && !b)   q <= 1'b0;
  end

endmodule
