// ahb_apb_bridge - AHB-Lite slave that performs each transfer on APB.
//
// An accepted AHB address phase starts an APB transfer in the following
// cycle: SETUP (PSEL=1, PENABLE=0), then ACCESS (PENABLE=1) until PREADY.
// The AHB data phase is held with HREADYOUT low meanwhile, so a transfer to
// a zero-wait APB slave takes two data-phase cycles. PWDATA is HWDATA, which
// the AHB master keeps stable through the stretched data phase; HRDATA is
// PRDATA in the completing cycle. PSLVERR becomes the two-cycle AHB ERROR
// response. A new address phase can be accepted in the completing cycle.
//
// Paper vs. this design: the subsystem puts its low-bandwidth peripherals on
// an APB segment behind the AHB bus, which is what this bridge serves. The
// state machine, the one-cycle setup phase and the mapping of PSLVERR onto
// the AHB ERROR response are this design's choices (AMBA-standard behaviour).
`include "RTL.svh"
module ahb_apb_bridge
  import chipkit_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  ahb_if.slave ahb,
  apb_if.master apb
);
  typedef enum logic [1:0] {BR_IDLE, BR_SETUP, BR_ACCESS, BR_ERR} br_state_e;
  br_state_e   state_q, state_d;
  logic [31:0] addr_q;
  logic        write_q;
  logic        ap_valid, done_ok;

  always_comb begin
    ap_valid = ahb.hsel && ahb.hready && ahb.htrans[1];
    done_ok  = (state_q == BR_ACCESS) && apb.pready && !apb.pslverr;
    state_d  = state_q;
    case (state_q)
      BR_SETUP:  state_d = BR_ACCESS;
      BR_ACCESS: begin
        if (apb.pready) state_d = apb.pslverr ? BR_ERR : (ap_valid ? BR_SETUP : BR_IDLE);
      end
      default:   state_d = ap_valid ? BR_SETUP : BR_IDLE;   // BR_IDLE, BR_ERR
    endcase
  end

  `FF(state_d,    state_q, clk, 1'b1,     rst_n, BR_IDLE)
  `FF(ahb.haddr,  addr_q,  clk, ap_valid, rst_n, '0)
  `FF(ahb.hwrite, write_q, clk, ap_valid, rst_n, 1'b0)

  always_comb begin
    apb.paddr     = addr_q;
    apb.pwrite    = write_q;
    apb.pwdata    = ahb.hwdata;
    apb.psel      = (state_q == BR_SETUP) || (state_q == BR_ACCESS);
    apb.penable   = (state_q == BR_ACCESS);
    ahb.hrdata    = apb.prdata;
    ahb.hreadyout = (state_q == BR_IDLE) || (state_q == BR_ERR) || done_ok;
    ahb.hresp     = (state_q == BR_ERR) ||
                    ((state_q == BR_ACCESS) && apb.pready && apb.pslverr);
  end
endmodule
