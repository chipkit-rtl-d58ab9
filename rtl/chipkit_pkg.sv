// chipkit_pkg - types and constants shared by the SoC subsystem.
//
// Holds the AMBA AHB-Lite encodings (HTRANS, HSIZE, HRESP), the memory map
// (pulled in from soc_memmap.svh so that the map lives in one header), and
// a decode helper that the AHB interconnect uses to turn an address into a
// slave index.
//
// Paper vs. this design: the paper keeps the memory map in one SystemVerilog
// header, which this package includes. The encodings are AMBA's; the helper
// functions are this design's. ahb_region_hit takes a 32-bit index of which
// only the low bits select a region, so lint tools report the upper bits as
// unused; that is harmless.
package chipkit_pkg;

  // AHB-Lite transfer type
  typedef enum logic [1:0] {
    HTRANS_IDLE   = 2'b00,
    HTRANS_BUSY   = 2'b01,
    HTRANS_NONSEQ = 2'b10,
    HTRANS_SEQ    = 2'b11
  } htrans_e;

  // AHB-Lite transfer size (only up to a 32-bit word is used here)
  typedef enum logic [2:0] {
    HSIZE_BYTE = 3'b000,
    HSIZE_HALF = 3'b001,
    HSIZE_WORD = 3'b010
  } hsize_e;

  localparam logic HRESP_OKAY  = 1'b0;
  localparam logic HRESP_ERROR = 1'b1;

`include "soc_memmap.svh"

  // True when addr lies in AHB slave region idx.
  function automatic logic ahb_region_hit(input logic [31:0] addr, input int unsigned idx);
    return ((addr & ~(AHB_SIZE[idx] - 32'd1)) == AHB_BASE[idx]);
  endfunction

  // Byte lane strobes of an AHB transfer of size hsize at address addr[1:0].
  function automatic logic [3:0] ahb_strobe(input logic [2:0] hsize, input logic [1:0] addr);
    case (hsize)
      3'b000:  return 4'b0001 << addr;
      3'b001:  return addr[1] ? 4'b1100 : 4'b0011;
      default: return 4'b1111;
    endcase
  endfunction

endpackage
