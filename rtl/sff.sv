// sff: MUX-based scan flip-flop, the storage element of every scan chain.
//
// A 2:1 multiplexer in front of a D flip-flop chooses the functional input d
// (se = 0, normal mode and scan capture) or the scan input si (se = 1, scan
// shift). q is the functional output and, at the same time, the scan output
// that feeds the next cell of the chain.
//
// Timing: q takes the selected input at the rising edge of clk; one bit moves
// one cell per clock while shifting. rst clears q to 0 at once, independent
// of clk.
//
// From the paper: the mux-plus-flip-flop structure and the port names (in,
// si, se, clk, rst, out/so). The mux polarity (se = 1 selects si) follows the
// chain drawings, which put the functional input on mux input 0 and SI on
// input 1; the stand-alone SFF drawing labels them the other way round. Reset
// polarity, its asynchronous action and the reset value 0 are this design's
// own choices.
module sff (
  input  logic clk,
  input  logic rst,
  input  logic se,
  input  logic d,
  input  logic si,
  output logic q
);

  always_ff @(posedge clk or posedge rst) begin
    if (rst) q <= 1'b0;
    else     q <= se ? si : d;
  end

endmodule
