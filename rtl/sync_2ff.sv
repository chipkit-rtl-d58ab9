// sync_2ff - two-flop synchronizer for a single asynchronous input bit.
//
// A library-component wrapper: in silicon it would be replaced by the
// foundry's synchronizer cell; here it is two flip-flops in series. The
// output follows the input two to three clock edges later. Reset value is 0.
//
// Paper vs. this design: the paper instantiates synchronizers as physical IP
// wrapped for the process; the two-flop body is this design's generic
// stand-in.
`include "RTL.svh"
module sync_2ff (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  logic meta;
  `FF(d,    meta, clk, 1'b1, rst_n, 1'b0)
  `FF(meta, q,    clk, 1'b1, rst_n, 1'b0)
endmodule
