// apb_rtc - real-time counter on the APB bus.
//
// Counts rising edges of the off-chip RTC oscillator (for example a
// 32.768 kHz crystal), so software can time a workload in real time,
// independent of HCLK. The oscillator is brought into the HCLK domain with a
// two-flop synchronizer and edge-detected, which requires HCLK to run at
// least about three times faster than the oscillator. Registers:
//   0x0 COUNT  R: current count   W: load a new count
//   0x4 CTRL   RW: bit0 ENABLE (reset 1)
// The count becomes visible two to three HCLK cycles after an oscillator
// edge. No wait states, no errors.
//
// Paper vs. this design: the paper includes a real-time counter fed by an
// off-chip RTC oscillator to time workloads. Sampling the oscillator in the
// HCLK domain (rather than a counter clocked by the oscillator with a clock-
// domain crossing) and the register layout are this design's choices.
`include "RTL.svh"
module apb_rtc (
  input  logic clk,
  input  logic rst_n,
  apb_if.slave apb,
  input  logic rtc_osc
);
  logic        osc_s, osc_d1, tick, wr, en_q;
  logic [31:0] count_q, count_d;

  sync_2ff u_sync (.clk, .rst_n, .d(rtc_osc), .q(osc_s));
  `FF(osc_s, osc_d1, clk, 1'b1, rst_n, 1'b0)

  always_comb begin
    tick    = osc_s && !osc_d1;
    wr      = apb.psel && apb.penable && apb.pwrite;
    count_d = count_q;
    if (wr && apb.paddr[3:2] == 2'd0) count_d = apb.pwdata;
    else if (tick && en_q)            count_d = count_q + 32'd1;
  end

  `FF(count_d,      count_q, clk, 1'b1, rst_n, '0)
  `FF(apb.pwdata[0], en_q,   clk, wr && apb.paddr[3:2] == 2'd1, rst_n, 1'b1)

  always_comb begin
    case (apb.paddr[3:2])
      2'd0:    apb.prdata = count_q;
      2'd1:    apb.prdata = {31'd0, en_q};
      default: apb.prdata = '0;
    endcase
    apb.pready  = 1'b1;
    apb.pslverr = 1'b0;
  end
endmodule
