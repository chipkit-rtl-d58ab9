// apb_interconnect - decoder and read mux of the peripheral (APB) bus.
//
// The bridge's APB master link fans out to APB_NSLV peripherals. PADDR bits
// [APB_SEL_LSB +: APB_SEL_W] pick the peripheral (4 KB each, per
// soc_memmap.svh); only that one sees PSEL. A slot with no peripheral is
// answered at once with PSLVERR, which the bridge reports as an AHB ERROR.
// Purely combinational.
//
// Paper vs. this design: the paper places its peripherals on a compact APB
// interconnect. The 4 KB slots, the decode bits and the error for an empty
// slot are this design's choices.
module apb_interconnect
  import chipkit_pkg::*;
(
  apb_if.xbar_m m,
  apb_if.xbar_s s [APB_NSLV]
);
  logic [APB_SEL_W-1:0] idx;
  logic [31:0]          prdata_s [APB_NSLV];
  logic [APB_NSLV-1:0]  pready_s, pslverr_s;

  always_comb idx = m.paddr[APB_SEL_LSB +: APB_SEL_W];

  for (genvar i = 0; i < APB_NSLV; i++) begin : g_slv
    assign s[i].paddr   = m.paddr;
    assign s[i].penable = m.penable;
    assign s[i].pwrite  = m.pwrite;
    assign s[i].pwdata  = m.pwdata;
    assign s[i].psel    = m.psel && (idx == APB_SEL_W'(i));
    assign prdata_s[i]  = s[i].prdata;
    assign pready_s[i]  = s[i].pready;
    assign pslverr_s[i] = s[i].pslverr;
  end

  always_comb begin
    // unmapped slot: complete immediately with an error
    m.prdata  = '0;
    m.pready  = 1'b1;
    m.pslverr = 1'b1;
    for (int unsigned i = 0; i < APB_NSLV; i++) begin
      if (idx == APB_SEL_W'(i)) begin
        m.prdata  = prdata_s[i];
        m.pready  = pready_s[i];
        m.pslverr = pslverr_s[i];
      end
    end
  end
endmodule
