// ahb_interconnect - single-layer AHB-Lite interconnect with address decoder.
//
// One master link (from the bus-master mux) fans out to AHB_NSLV slave
// links. All slaves see the address, control and write data; the decoder
// raises the HSEL of the one region that the address falls in, taking the
// regions from soc_memmap.svh. The selection is registered when HREADY is high
// so that the data phase (HRDATA, HREADYOUT, HRESP) is returned from the
// slave that owns it. An address in no region selects the built-in default
// slave, which returns an ERROR instead of leaving the master waiting.
// HREADY fed back to every slave is the data-phase owner's HREADYOUT.
// Zero added latency: decode is combinational, the response mux is too.
//
// Paper vs. this design: a single-layer AHB interconnect whose decoder is
// defined by one header holding the whole memory map follows the paper. The
// registered data-phase select, the default slave and the one-hot assertion
// are this design's choices. The assertion is disabled while RESETn is low,
// which makes a lint tool see the reset used both asynchronously (in the
// flip-flops) and synchronously (in the assertion); that warning stands, as
// the assertion generates no logic.
`include "RTL.svh"
module ahb_interconnect
  import chipkit_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  ahb_if.xbar_m m,
  ahb_if.xbar_s s [AHB_NSLV]
);
  // one select per slave plus the default slave at index AHB_NSLV
  logic [AHB_NSLV:0]   sel_ap;       // address phase select
  logic [AHB_NSLV:0]   sel_dp_q;     // data phase select
  logic [31:0]         rdata_s [AHB_NSLV];
  logic [AHB_NSLV-1:0] ready_s, resp_s;
  logic                def_ready, def_resp;
  logic                hready;

  always_comb begin
    sel_ap = '0;
    for (int unsigned i = 0; i < AHB_NSLV; i++)
      sel_ap[i] = ahb_region_hit(m.haddr, i);
    sel_ap[AHB_NSLV] = ~|sel_ap[AHB_NSLV-1:0];
  end

  // reset value: the default slave owns the (idle) first data phase
  `FF(sel_ap, sel_dp_q, clk, hready, rst_n, (AHB_NSLV+1)'(1) << AHB_NSLV)

  for (genvar i = 0; i < AHB_NSLV; i++) begin : g_slv
    assign s[i].haddr     = m.haddr;
    assign s[i].htrans    = m.htrans;
    assign s[i].hwrite    = m.hwrite;
    assign s[i].hsize     = m.hsize;
    assign s[i].hburst    = m.hburst;
    assign s[i].hprot     = m.hprot;
    assign s[i].hmastlock = m.hmastlock;
    assign s[i].hwdata    = m.hwdata;
    assign s[i].hsel      = sel_ap[i];
    assign s[i].hready    = hready;
    assign rdata_s[i]     = s[i].hrdata;
    assign ready_s[i]     = s[i].hreadyout;
    assign resp_s[i]      = s[i].hresp;
  end

  ahb_default_slave u_default (
    .clk, .rst_n,
    .hsel      (sel_ap[AHB_NSLV]),
    .hready    (hready),
    .htrans    (m.htrans),
    .hreadyout (def_ready),
    .hresp     (def_resp)
  );

  // data phase response mux (sel_dp_q is one-hot)
  always_comb begin
    hready   = sel_dp_q[AHB_NSLV] ? def_ready : 1'b0;
    m.hresp  = sel_dp_q[AHB_NSLV] ? def_resp  : HRESP_OKAY;
    m.hrdata = '0;
    for (int unsigned i = 0; i < AHB_NSLV; i++) begin
      if (sel_dp_q[i]) begin
        hready   = ready_s[i];
        m.hresp  = resp_s[i];
        m.hrdata = rdata_s[i];
      end
    end
    m.hready = hready;
  end

  // the data-phase select must stay one-hot
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot(sel_dp_q));
endmodule
