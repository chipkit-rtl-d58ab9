// RTL.svh - shared register-inference macro.
//
// Every flip-flop in this code base is written through `FF so that all
// registers are rising-edge with an asynchronous active-low reset, and so the
// inference template can be swapped in one place for an ASIC or FPGA library.
// Arguments: next value, register, clock, load enable, active-low reset,
// reset value.
//
// Paper vs. this design: the macro name, the register style (rising edge,
// asynchronous active-low reset) and the header name follow the paper's
// coding guidelines; adding a load-enable argument and the argument order are
// this design's choices.
`ifndef CHIPKIT_RTL_SVH
`define CHIPKIT_RTL_SVH

`define FF(__d, __q, __clk, __en, __rst_n, __rstval) \
  always_ff @(posedge (__clk) or negedge (__rst_n)) begin \
    if (!(__rst_n))   __q <= (__rstval); \
    else if (__en)    __q <= (__d); \
  end

`endif
