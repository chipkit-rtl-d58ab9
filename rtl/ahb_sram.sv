// ahb_sram - AHB-Lite slave interface to an on-chip SRAM (IMEM / DMEM).
//
// Wraps a single-port SRAM (sram_sp) of SIZE_BYTES bytes, 32 bits wide.
// Reads are issued to the SRAM in the address phase and the data returns in
// the data phase with no wait state. Writes are performed in the data phase,
// when HWDATA is valid, using byte strobes from HSIZE/HADDR. A read whose
// address phase falls on the data phase of a write finds the SRAM busy: it is
// issued one cycle later and its data phase gets one wait state. So:
// write = 0 wait states, read = 0 wait states, read right after write = 1.
// HRESP is always OKAY.
//
// Paper vs. this design: the paper provides an AHB interface for SRAM macros
// so that program and data memories are bus accessible. The write-in-data-
// phase scheme and the one-wait-state read-after-write collision handling are
// this design's choices.
`include "RTL.svh"
module ahb_sram
  import chipkit_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 65536
) (
  input  logic clk,
  input  logic rst_n,
  ahb_if.slave ahb
);
  localparam int unsigned DEPTH = SIZE_BYTES / 4;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic          ap_valid, ap_read;
  logic          dp_write_q, rd_pend_q;
  logic [AW-1:0] dp_addr_q;
  logic [3:0]    dp_strb_q;
  logic          cs, we;
  logic [AW-1:0] addr;

  always_comb begin
    ap_valid = ahb.hsel && ahb.hready && ahb.htrans[1];
    ap_read  = ap_valid && !ahb.hwrite;
  end

  `FF(ap_valid &&  ahb.hwrite,                  dp_write_q, clk, ahb.hready, rst_n, 1'b0)
  `FF(ahb.haddr[AW+1:2],                        dp_addr_q,  clk, ahb.hready, rst_n, '0)
  `FF(ahb_strobe(ahb.hsize, ahb.haddr[1:0]),    dp_strb_q,  clk, ahb.hready, rst_n, '0)
  // a read that collides with a write data phase is deferred by one cycle
  `FF(ahb.hready && ap_read && dp_write_q,      rd_pend_q,  clk, 1'b1,       rst_n, 1'b0)

  always_comb begin
    cs   = 1'b0;
    we   = 1'b0;
    addr = ahb.haddr[AW+1:2];
    if (dp_write_q) begin
      cs = 1'b1; we = 1'b1; addr = dp_addr_q;
    end else if (rd_pend_q) begin
      cs = 1'b1; addr = dp_addr_q;
    end else if (ap_read) begin
      cs = 1'b1;
    end
  end

  sram_sp #(.DEPTH(DEPTH)) u_sram (
    .clk, .cs, .we,
    .be    (dp_strb_q),
    .addr  (addr),
    .wdata (ahb.hwdata),
    .rdata (ahb.hrdata)
  );

  always_comb begin
    ahb.hreadyout = !rd_pend_q;
    ahb.hresp     = HRESP_OKAY;
  end
endmodule
