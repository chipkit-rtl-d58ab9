// ahb_if - one AHB-Lite link, bundled as an interface.
//
// A link joins a bus master (or the bus-master mux) to the interconnect, or
// the interconnect to one slave. The same bundle is used for both; the four
// modports say which end a module sits on:
//   master  - a bus master (drives address/control/write data)
//   slave   - a bus slave (sees HSEL and HREADY, drives HREADYOUT)
//   xbar_m  - the fabric end of a master link (answers the master)
//   xbar_s  - the fabric end of a slave link (drives HSEL/HREADY to a slave)
// hready is HREADY as seen by a master, or the bus HREADY fed back to a
// slave; hreadyout is a slave's own ready. Protocol: AMBA 3 AHB-Lite.
//
// Paper vs. this design: the paper's subsystem uses AHB(-Lite) for its main
// interconnect; bundling each link as an interface is this design's choice.
interface ahb_if;
  logic [31:0] haddr;
  logic [1:0]  htrans;
  logic        hwrite;
  logic [2:0]  hsize;
  logic [2:0]  hburst;
  logic [3:0]  hprot;
  logic        hmastlock;
  logic [31:0] hwdata;
  logic        hsel;
  logic        hready;
  logic        hreadyout;
  logic [31:0] hrdata;
  logic        hresp;

  modport master (output haddr, htrans, hwrite, hsize, hburst, hprot, hmastlock, hwdata,
                  input  hrdata, hready, hresp);
  modport slave  (input  haddr, htrans, hwrite, hsize, hburst, hprot, hmastlock, hwdata,
                         hsel, hready,
                  output hrdata, hreadyout, hresp);
  modport xbar_m (input  haddr, htrans, hwrite, hsize, hburst, hprot, hmastlock, hwdata,
                  output hrdata, hready, hresp);
  modport xbar_s (output haddr, htrans, hwrite, hsize, hburst, hprot, hmastlock, hwdata,
                         hsel, hready,
                  input  hrdata, hreadyout, hresp);
endinterface
