// chipkit_soc - the reusable SoC subsystem, top level (core side of the pads).
//
// Two bus masters, the on-chip CPU and the UART host, share one AHB-Lite
// layer through the bus-master mux. The single-layer AHB interconnect
// decodes the memory map (soc_memmap.svh) onto IMEM and DMEM (64 KB SRAMs),
// GPIO, the AHB-to-APB bridge and the custom accelerator port; unmapped
// addresses get an ERROR from the default slave. Behind the bridge a small
// APB bus carries two UART slaves, the real-time counter, the watchdog and
// the CSR block, whose DIAG_SEL register steers the DIAG pin multiplexer.
//
// The CPU (an Arm Cortex-M0 in silicon) and the custom accelerator are not
// part of this RTL: the CPU's AHB-Lite master port, its interrupt lines, and
// the accelerator's AHB-Lite slave port, interrupt and reset appear as ports.
// Everything runs on HCLK and the asynchronous active-low RESETn; the RTC
// oscillator is only sampled. Pad cells sit outside this module.
//
// DIAG sources (select value: signal):
//   0 HCLK          1 RESETn          2 wdog_reset_n   3 accel_rst_n
//   4 uart irq      5 watchdog irq    6 accel_irq      7 rtc_osc
//   8 UART-host TX  9 UART-host RX   10 bus HREADY    11 bus HRESP
//  12 bus owner    13 UART TX        14 UART RX        15 constant 1
//
// Paper vs. this design: the set of blocks, the two masters, the single-layer
// AHB bus with an APB segment, the single HCLK with asynchronous active-low
// RESETn, the DIAG multiplexer, the PCB reset line and the accelerator as a
// bus slave with an interrupt follow the paper's subsystem. The memory map,
// the DIAG source list, the interrupt order and all widths are this design's
// choices. cpu_irq[2] is the accel_irq input passed straight to the CPU's
// interrupt lines, so one output bit is driven directly from an input.
`include "RTL.svh"
module chipkit_soc
  import chipkit_pkg::*;
#(
  parameter int unsigned IMEM_BYTES   = 65536,
  parameter int unsigned DMEM_BYTES   = 65536,
  parameter int unsigned GPIO_WIDTH   = 16,
  parameter int unsigned N_DIAG       = 2,
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic                  HCLK,
  input  logic                  RESETn,
  // UART host (PC bus master)
  input  logic                  uh_rxd,
  output logic                  uh_txd,
  // UART slave (printf console)
  input  logic                  uart_rxd,
  output logic                  uart_txd,
  // second UART slave
  input  logic                  uart1_rxd,
  output logic                  uart1_txd,
  // GPIO
  input  logic [GPIO_WIDTH-1:0] gpio_in,
  output logic [GPIO_WIDTH-1:0] gpio_out,
  output logic [GPIO_WIDTH-1:0] gpio_oe,
  // RTC oscillator, DIAG pins, PCB reset request
  input  logic                  rtc_osc,
  output logic [N_DIAG-1:0]     diag,
  output logic                  pcb_reset_n,
  // CPU AHB-Lite master port and interrupt lines
  input  logic [31:0]           cpu_haddr,
  input  logic [1:0]            cpu_htrans,
  input  logic                  cpu_hwrite,
  input  logic [2:0]            cpu_hsize,
  input  logic [2:0]            cpu_hburst,
  input  logic [3:0]            cpu_hprot,
  input  logic                  cpu_hmastlock,
  input  logic [31:0]           cpu_hwdata,
  output logic [31:0]           cpu_hrdata,
  output logic                  cpu_hready,
  output logic                  cpu_hresp,
  output logic [3:0]            cpu_irq,      // {uart1, accel, watchdog, uart}
  // custom accelerator AHB-Lite slave port, interrupt and reset
  output logic                  accel_hsel,
  output logic [31:0]           accel_haddr,
  output logic [1:0]            accel_htrans,
  output logic                  accel_hwrite,
  output logic [2:0]            accel_hsize,
  output logic [31:0]           accel_hwdata,
  output logic                  accel_hready,
  input  logic                  accel_hreadyout,
  input  logic [31:0]           accel_hrdata,
  input  logic                  accel_hresp,
  input  logic                  accel_irq,
  output logic                  accel_rst_n,
  output logic [23:0]           accel_chicken   // CSR experiment bits
);
  localparam int unsigned N_SRC = 16;
  localparam int unsigned SEL_W = 4;

  ahb_if cpu_bus ();
  ahb_if uh_bus ();
  ahb_if sys_bus ();
  ahb_if slv [AHB_NSLV] ();
  apb_if apb_m ();
  apb_if apb_s [APB_NSLV] ();

  logic                    owner, uart_irq, uart1_irq, wdog_irq;
  logic [N_DIAG*SEL_W-1:0] diag_sel;
  logic [N_SRC-1:0]        diag_src;

  // CPU master port
  assign cpu_bus.haddr     = cpu_haddr;
  assign cpu_bus.htrans    = cpu_htrans;
  assign cpu_bus.hwrite    = cpu_hwrite;
  assign cpu_bus.hsize     = cpu_hsize;
  assign cpu_bus.hburst    = cpu_hburst;
  assign cpu_bus.hprot     = cpu_hprot;
  assign cpu_bus.hmastlock = cpu_hmastlock;
  assign cpu_bus.hwdata    = cpu_hwdata;
  assign cpu_hrdata        = cpu_bus.hrdata;
  assign cpu_hready        = cpu_bus.hready;
  assign cpu_hresp         = cpu_bus.hresp;
  assign cpu_irq           = {uart1_irq, accel_irq, wdog_irq, uart_irq};

  uart_host #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart_host (
    .clk(HCLK), .rst_n(RESETn), .uart_rx(uh_rxd), .uart_tx(uh_txd), .ahb(uh_bus)
  );

  ahb_master_mux u_master_mux (
    .clk(HCLK), .rst_n(RESETn), .m0(cpu_bus), .m1(uh_bus), .s(sys_bus), .owner(owner)
  );

  ahb_interconnect u_ahb (
    .clk(HCLK), .rst_n(RESETn), .m(sys_bus), .s(slv)
  );

  ahb_sram #(.SIZE_BYTES(IMEM_BYTES)) u_imem (.clk(HCLK), .rst_n(RESETn), .ahb(slv[AHB_SLV_IMEM]));
  ahb_sram #(.SIZE_BYTES(DMEM_BYTES)) u_dmem (.clk(HCLK), .rst_n(RESETn), .ahb(slv[AHB_SLV_DMEM]));

  ahb_gpio #(.WIDTH(GPIO_WIDTH)) u_gpio (
    .clk(HCLK), .rst_n(RESETn), .ahb(slv[AHB_SLV_GPIO]),
    .gpio_in(gpio_in), .gpio_out(gpio_out), .gpio_oe(gpio_oe)
  );

  ahb_apb_bridge u_bridge (.clk(HCLK), .rst_n(RESETn), .ahb(slv[AHB_SLV_APB]), .apb(apb_m));

  // custom accelerator slave port
  assign accel_hsel                   = slv[AHB_SLV_ACCEL].hsel;
  assign accel_haddr                  = slv[AHB_SLV_ACCEL].haddr;
  assign accel_htrans                 = slv[AHB_SLV_ACCEL].htrans;
  assign accel_hwrite                 = slv[AHB_SLV_ACCEL].hwrite;
  assign accel_hsize                  = slv[AHB_SLV_ACCEL].hsize;
  assign accel_hwdata                 = slv[AHB_SLV_ACCEL].hwdata;
  assign accel_hready                 = slv[AHB_SLV_ACCEL].hready;
  assign slv[AHB_SLV_ACCEL].hreadyout = accel_hreadyout;
  assign slv[AHB_SLV_ACCEL].hrdata    = accel_hrdata;
  assign slv[AHB_SLV_ACCEL].hresp     = accel_hresp;

  apb_interconnect u_apb (.m(apb_m), .s(apb_s));

  apb_uart #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk(HCLK), .rst_n(RESETn), .apb(apb_s[APB_SLV_UART]),
    .uart_rx(uart_rxd), .uart_tx(uart_txd), .irq(uart_irq)
  );
  apb_uart #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart1 (
    .clk(HCLK), .rst_n(RESETn), .apb(apb_s[APB_SLV_UART1]),
    .uart_rx(uart1_rxd), .uart_tx(uart1_txd), .irq(uart1_irq)
  );

  apb_rtc u_rtc (.clk(HCLK), .rst_n(RESETn), .apb(apb_s[APB_SLV_RTC]), .rtc_osc(rtc_osc));

  apb_watchdog u_wdog (
    .clk(HCLK), .rst_n(RESETn), .apb(apb_s[APB_SLV_WDOG]), .irq(wdog_irq), .wdog_reset_n(pcb_reset_n)
  );

  apb_csr #(.N_DIAG(N_DIAG), .SEL_W(SEL_W)) u_csr (
    .clk(HCLK), .rst_n(RESETn), .apb(apb_s[APB_SLV_CSR]),
    .diag_sel(diag_sel), .accel_rst_n(accel_rst_n), .chicken(accel_chicken)
  );

  always_comb diag_src = {1'b1, uart_rxd, uart_txd, owner, sys_bus.hresp, sys_bus.hready,
                          uh_rxd, uh_txd, rtc_osc, accel_irq, wdog_irq, uart_irq,
                          accel_rst_n, pcb_reset_n, RESETn, HCLK};

  diag_mux #(.N_DIAG(N_DIAG), .N_SRC(N_SRC), .SEL_W(SEL_W)) u_diag (
    .src(diag_src), .sel(diag_sel), .diag(diag)
  );
endmodule
