// ahb_master_mux - shares one AHB-Lite layer between two bus masters.
//
// Master 0 is the on-chip CPU, master 1 the UART host. The layer has one
// owner at a time; the owner keeps it as long as it issues transfers
// (NONSEQ/SEQ/BUSY), so bursts are never split. When the owner issues IDLE
// while the other master is requesting, ownership passes to the other master
// at the next accepted address phase ("park on last owner"). A master that
// requests while the other owns the layer sees HREADY low and so holds its
// address phase until it is granted; no transfer is lost or duplicated.
// The data phase (HWDATA in, HRDATA/HRESP out) follows the master whose
// address phase was accepted one transfer earlier. Adds no latency when
// there is no contention; the losing master waits at most until the owner
// goes idle.
//
// Paper vs. this design: the paper's subsystem has exactly two bus masters,
// the CPU and the UART host, either of which can run a test. How they share
// the layer (ownership held while requesting, no fixed priority, the
// waiting master stalled by HREADY) is this design's choice.
`include "RTL.svh"
module ahb_master_mux (
  input  logic clk,
  input  logic rst_n,
  ahb_if.xbar_m m0,
  ahb_if.xbar_m m1,
  ahb_if.master s,
  output logic  owner          // current address-phase owner (for DIAG)
);
  logic owner_q, dp_owner_q, addr_owner;
  logic req0, req1, req_own, req_oth;

  always_comb begin
    req0 = (m0.htrans != 2'b00);
    req1 = (m1.htrans != 2'b00);
    req_own = owner_q ? req1 : req0;
    req_oth = owner_q ? req0 : req1;
    // hand over only on an accepted address phase in which the owner is idle
    addr_owner = (s.hready && !req_own && req_oth) ? ~owner_q : owner_q;
  end

  `FF(addr_owner, owner_q,    clk, s.hready, rst_n, 1'b0)
  `FF(addr_owner, dp_owner_q, clk, s.hready, rst_n, 1'b0)

  always_comb begin
    s.haddr     = addr_owner ? m1.haddr     : m0.haddr;
    s.htrans    = addr_owner ? m1.htrans    : m0.htrans;
    s.hwrite    = addr_owner ? m1.hwrite    : m0.hwrite;
    s.hsize     = addr_owner ? m1.hsize     : m0.hsize;
    s.hburst    = addr_owner ? m1.hburst    : m0.hburst;
    s.hprot     = addr_owner ? m1.hprot     : m0.hprot;
    s.hmastlock = addr_owner ? m1.hmastlock : m0.hmastlock;
    s.hwdata    = dp_owner_q ? m1.hwdata    : m0.hwdata;

    m0.hrdata = s.hrdata;
    m1.hrdata = s.hrdata;
    m0.hresp  = (dp_owner_q == 1'b0) ? s.hresp : 1'b0;
    m1.hresp  = (dp_owner_q == 1'b1) ? s.hresp : 1'b0;
    // a master involved in the current transfer follows the bus HREADY;
    // an uninvolved master is held while it requests, free while idle
    m0.hready = (dp_owner_q == 1'b0 || addr_owner == 1'b0) ? s.hready : !req0;
    m1.hready = (dp_owner_q == 1'b1 || addr_owner == 1'b1) ? s.hready : !req1;
    owner     = owner_q;
  end
endmodule
