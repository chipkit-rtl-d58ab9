// soc_memmap.svh - the memory map of the AHB segment and of the APB segment.
//
// This one header is the only place the address decoders learn the map from:
// adding or removing a bus slave means editing the slave count and the
// base/size tables below (and wiring the new port in the top level).
// Each region is a power-of-two size aligned to its size. Any address that
// falls in no region is answered by the default slave with an ERROR response.
//
//   AHB slave  base         size     block
//   0 IMEM     0x0000_0000  64 KB    instruction SRAM
//   1 DMEM     0x2000_0000  64 KB    data SRAM
//   2 GPIO     0x4000_0000   4 KB    GPIO registers
//   3 APB      0x5000_0000  64 KB    AHB-to-APB bridge (peripherals below)
//   4 ACCEL    0x7000_0000 256 MB    custom accelerator IP (external port)
//
//   APB slave  base         size     block
//   0 UART     0x5000_0000   4 KB    UART slave
//   1 RTC      0x5000_1000   4 KB    real-time counter
//   2 WDOG     0x5000_2000   4 KB    watchdog timer
//   3 CSR      0x5000_3000   4 KB    control/status registers, DIAG selects
//   4 UART1    0x5000_4000   4 KB    second UART slave
//
// Paper vs. this design: one header holding the whole memory map follows the
// paper, and 0x7000_0000 is the address the paper's UART-host example reads.
// Every other base and size is this design's choice; 64 KB for IMEM and DMEM
// matches the instruction and data memories of one of the paper's chips.
`ifndef CHIPKIT_SOC_MEMMAP_SVH
`define CHIPKIT_SOC_MEMMAP_SVH

localparam int unsigned AHB_NSLV = 5;
localparam int unsigned AHB_SLV_IMEM  = 0;
localparam int unsigned AHB_SLV_DMEM  = 1;
localparam int unsigned AHB_SLV_GPIO  = 2;
localparam int unsigned AHB_SLV_APB   = 3;
localparam int unsigned AHB_SLV_ACCEL = 4;

localparam logic [31:0] AHB_BASE [AHB_NSLV] = '{
  32'h0000_0000, 32'h2000_0000, 32'h4000_0000, 32'h5000_0000, 32'h7000_0000
};
localparam logic [31:0] AHB_SIZE [AHB_NSLV] = '{
  32'h0001_0000, 32'h0001_0000, 32'h0000_1000, 32'h0001_0000, 32'h1000_0000
};

localparam int unsigned APB_NSLV = 5;
localparam int unsigned APB_SLV_UART = 0;
localparam int unsigned APB_SLV_RTC  = 1;
localparam int unsigned APB_SLV_WDOG = 2;
localparam int unsigned APB_SLV_CSR  = 3;
localparam int unsigned APB_SLV_UART1 = 4;
// APB slaves are 4 KB apart inside the bridge's window; PADDR[15:12] selects.
localparam int unsigned APB_SEL_LSB = 12;
localparam int unsigned APB_SEL_W   = 4;

`endif
