// ahb_gpio - general-purpose IO block on the AHB bus.
//
// WIDTH pins, each with an output value, an output enable (pad direction)
// and a synchronized input value. Registers, word offsets from the base:
//   0x0 DATA_OUT  RW  value driven on pins whose OE bit is 1   (reset 0)
//   0x4 DIR       RW  output enables, 1 = output              (reset 0)
//   0x8 DATA_IN   RO  pin values through a two-flop synchronizer
// Writes take effect at the end of the data phase; reads return the register
// in the data phase. No wait states; HRESP is always OKAY.
//
// Paper vs. this design: GPIO is one of the off-chip interfaces the paper lists
// as essential. Its width, register layout, bus (AHB rather than APB) and the
// input synchronizer are this design's choices.
`include "RTL.svh"
module ahb_gpio
  import chipkit_pkg::*;
#(
  parameter int unsigned WIDTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  ahb_if.slave             ahb,
  input  logic [WIDTH-1:0] gpio_in,
  output logic [WIDTH-1:0] gpio_out,
  output logic [WIDTH-1:0] gpio_oe
);
  logic             dp_wr_q, dp_rd_q;
  logic [3:2]       dp_addr_q;
  logic [WIDTH-1:0] out_q, oe_q, in_sync;
  logic             ap_valid;

  always_comb ap_valid = ahb.hsel && ahb.hready && ahb.htrans[1];
  `FF(ap_valid &&  ahb.hwrite, dp_wr_q,   clk, ahb.hready, rst_n, 1'b0)
  `FF(ap_valid && !ahb.hwrite, dp_rd_q,   clk, ahb.hready, rst_n, 1'b0)
  `FF(ahb.haddr[3:2],          dp_addr_q, clk, ahb.hready, rst_n, '0)

  `FF(ahb.hwdata[WIDTH-1:0], out_q, clk, dp_wr_q && dp_addr_q == 2'd0, rst_n, '0)
  `FF(ahb.hwdata[WIDTH-1:0], oe_q,  clk, dp_wr_q && dp_addr_q == 2'd1, rst_n, '0)

  for (genvar i = 0; i < WIDTH; i++) begin : g_sync
    sync_2ff u_sync (.clk, .rst_n, .d(gpio_in[i]), .q(in_sync[i]));
  end

  always_comb begin
    ahb.hrdata = '0;
    if (dp_rd_q) begin
      case (dp_addr_q)
        2'd0:    ahb.hrdata[WIDTH-1:0] = out_q;
        2'd1:    ahb.hrdata[WIDTH-1:0] = oe_q;
        2'd2:    ahb.hrdata[WIDTH-1:0] = in_sync;
        default: ahb.hrdata = '0;
      endcase
    end
    ahb.hreadyout = 1'b1;
    ahb.hresp     = HRESP_OKAY;
    gpio_out      = out_q;
    gpio_oe       = oe_q;
  end
endmodule
