// apb_if - one AMBA 3 APB link, bundled as an interface.
//
// Used between the AHB-to-APB bridge and the APB interconnect (master /
// xbar_m ends) and between the APB interconnect and each peripheral
// (xbar_s / slave ends). PREADY lets a slave extend the access phase and
// PSLVERR flags an error, which the bridge turns into an AHB ERROR.
//
// Paper vs. this design: the peripherals sit on an APB segment as in the paper;
// the AMBA 3 signal set (with PREADY and PSLVERR) is this design's choice.
interface apb_if;
  logic [31:0] paddr;
  logic        psel;
  logic        penable;
  logic        pwrite;
  logic [31:0] pwdata;
  logic [31:0] prdata;
  logic        pready;
  logic        pslverr;

  modport master (output paddr, psel, penable, pwrite, pwdata,
                  input  prdata, pready, pslverr);
  modport slave  (input  paddr, psel, penable, pwrite, pwdata,
                  output prdata, pready, pslverr);
  modport xbar_m (input  paddr, psel, penable, pwrite, pwdata,
                  output prdata, pready, pslverr);
  modport xbar_s (output paddr, psel, penable, pwrite, pwdata,
                  input  prdata, pready, pslverr);
endinterface
