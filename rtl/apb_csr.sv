// apb_csr - SoC control and status registers on the APB bus.
//
// Memory-mapped configuration for bring-up and experiments. In a full flow
// this module is the kind generated from a register database; here the
// register list is written out by hand. Registers:
//   0x00 ID        R   constant ID_VALUE
//   0x04 SCRATCH   RW  free scratch word for software and bus tests
//   0x08 DIAG_SEL  RW  one SEL_W-bit field per DIAG pin, pin i at bits
//                      [8*i +: SEL_W], choosing its debug source
//   0x0C CTRL      RW  bit0 ACCEL_RST_N: reset of the custom IP, under
//                      software control (reset 0 = held in reset);
//                      bits[31:8] CHICKEN, spare experiment bits
//   0x10 CYCLES    R   free-running HCLK cycle counter (wraps)
// Writes to read-only or unused offsets are ignored and reads of unused
// offsets return 0. No wait states, no errors.
//
// Paper vs. this design: the paper generates its CSR block from a register
// database with a templating script, and uses CSRs for experiment control
// (chicken bits), for resets under software control and for performance
// counters. This block is a small hand-written instance of such a generated
// module; its register list, offsets and reset values are this design's
// choices.
`include "RTL.svh"
module apb_csr #(
  parameter int unsigned  N_DIAG   = 2,
  parameter int unsigned  SEL_W    = 4,
  parameter logic [31:0]  ID_VALUE = 32'hC41B_0001
) (
  input  logic                    clk,
  input  logic                    rst_n,
  apb_if.slave                    apb,
  output logic [N_DIAG*SEL_W-1:0] diag_sel,
  output logic                    accel_rst_n,
  output logic [23:0]             chicken
);
  logic        wr;
  logic [4:2]  ridx;
  logic [31:0] scratch_q, diag_q, cycles_q;
  logic        arst_q;      // CTRL bit 0
  logic [23:0] chicken_q;   // CTRL bits [31:8]

  always_comb begin
    wr   = apb.psel && apb.penable && apb.pwrite;
    ridx = apb.paddr[4:2];
  end

  `FF(apb.pwdata,            scratch_q, clk, wr && ridx == 3'd1, rst_n, '0)
  `FF(apb.pwdata,            diag_q,    clk, wr && ridx == 3'd2, rst_n, '0)
  `FF(apb.pwdata[0],         arst_q,    clk, wr && ridx == 3'd3, rst_n, 1'b0)
  `FF(apb.pwdata[31:8],      chicken_q, clk, wr && ridx == 3'd3, rst_n, '0)
  `FF(cycles_q + 32'd1,      cycles_q,  clk, 1'b1,               rst_n, '0)

  always_comb begin
    case (ridx)
      3'd0:    apb.prdata = ID_VALUE;
      3'd1:    apb.prdata = scratch_q;
      3'd2:    apb.prdata = diag_q;
      3'd3:    apb.prdata = {chicken_q, 7'd0, arst_q};
      3'd4:    apb.prdata = cycles_q;
      default: apb.prdata = '0;
    endcase
    apb.pready  = 1'b1;
    apb.pslverr = 1'b0;
    for (int i = 0; i < int'(N_DIAG); i++)
      diag_sel[i*SEL_W +: SEL_W] = diag_q[8*i +: SEL_W];
    accel_rst_n = arst_q;
    chicken     = chicken_q;
  end
endmodule
