// apb_watchdog - watchdog timer on the APB bus.
//
// A down-counter clocked by HCLK. While enabled it counts down from LOAD;
// software must write KICK (any value) before it reaches zero, which
// reloads it. On reaching zero the watchdog sets TIMEOUT (also the interrupt)
// and, if RESET_EN is set, pulls wdog_reset_n low. That output drives the
// PCB reset line, so the board resets the chip; it stays low until the
// chip reset clears it. Registers:
//   0x00 LOAD    RW  reload value (reset 0xFFFF_FFFF)
//   0x04 VALUE   R   current count
//   0x08 CTRL    RW  bit0 ENABLE, bit1 RESET_EN (reset 0)
//   0x0C KICK    W   reload VALUE from LOAD
//   0x10 STATUS  R   bit0 TIMEOUT; W: 1 to bit0 clears it (and the irq)
// Writing CTRL.ENABLE from 0 to 1 also reloads. No wait states, no errors.
//
// Paper vs. this design: the paper lists a watchdog timer among the APB
// peripherals and a reset request from chip to PCB among the off-chip
// signals; tying the two together, the register layout and the sticky reset
// request are this design's choices.
`include "RTL.svh"
module apb_watchdog (
  input  logic clk,
  input  logic rst_n,
  apb_if.slave apb,
  output logic irq,
  output logic wdog_reset_n
);
  logic        wr;
  logic [4:2]  ridx;
  logic [31:0] load_q, value_q, value_d;
  logic [1:0]  ctrl_q;
  logic        timeout_q, timeout_d, rst_req_q, rst_req_d, reload;

  always_comb begin
    wr     = apb.psel && apb.penable && apb.pwrite;
    ridx   = apb.paddr[4:2];
    reload = wr && ((ridx == 3'd3) || (ridx == 3'd2 && apb.pwdata[0] && !ctrl_q[0]));
    value_d   = value_q;
    timeout_d = timeout_q;
    rst_req_d = rst_req_q;
    if (reload) value_d = load_q;
    else if (ctrl_q[0]) begin
      if (value_q == 32'd0) begin
        timeout_d = 1'b1;
        if (ctrl_q[1]) rst_req_d = 1'b1;
        value_d = load_q;
      end else begin
        value_d = value_q - 32'd1;
      end
    end
    if (wr && ridx == 3'd4 && apb.pwdata[0]) timeout_d = 1'b0;
  end

  `FF(apb.pwdata,      load_q,    clk, wr && ridx == 3'd0, rst_n, 32'hFFFF_FFFF)
  `FF(apb.pwdata[1:0], ctrl_q,    clk, wr && ridx == 3'd2, rst_n, 2'b00)
  `FF(value_d,         value_q,   clk, 1'b1, rst_n, 32'hFFFF_FFFF)
  `FF(timeout_d,       timeout_q, clk, 1'b1, rst_n, 1'b0)
  `FF(rst_req_d,       rst_req_q, clk, 1'b1, rst_n, 1'b0)

  always_comb begin
    case (ridx)
      3'd0:    apb.prdata = load_q;
      3'd1:    apb.prdata = value_q;
      3'd2:    apb.prdata = {30'd0, ctrl_q};
      3'd4:    apb.prdata = {31'd0, timeout_q};
      default: apb.prdata = '0;
    endcase
    apb.pready   = 1'b1;
    apb.pslverr  = 1'b0;
    irq          = timeout_q;
    wdog_reset_n = !rst_req_q;
  end
endmodule
