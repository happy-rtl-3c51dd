// sat_counter: W-bit saturating up/down counter, the training element of the
// Hybrid page policy.
//
// With W = 2 its four values are the states OP (0), Weak OP (1), Weak CP (2)
// and CP (3): a page conflict moves one state towards CP, a page hit one state
// towards OP, and the counter sticks at both ends. The most significant bit is
// the counter's vote: 0 = keep the page open, 1 = close it. The reset value
// INIT = 0 (open page) follows the published scheme; holding the value when
// inc and dec arrive together is this design's choice.
//
// Timing: count updates on the rising clock edge after inc/dec; synchronous,
// active-low reset.
module sat_counter #(
  parameter int unsigned W    = 2,
  parameter int unsigned INIT = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         inc,
  input  logic         dec,
  output logic [W-1:0] count
);

  localparam logic [W-1:0] MAX = '1;

  always_ff @(posedge clk) begin
    if (!rst_n)
      count <= W'(INIT);
    else if (inc && !dec && count != MAX)
      count <= count + 1'b1;
    else if (dec && !inc && count != '0)
      count <= count - 1'b1;
  end

endmodule
