// ahb_default_slave - answers AHB transfers that hit no mapped region.
//
// An active transfer (NONSEQ or SEQ) selected onto this slave gets the
// standard two-cycle AHB ERROR response: one cycle with HREADYOUT low and
// HRESP=ERROR, then one with HREADYOUT high and HRESP=ERROR. IDLE and BUSY
// transfers get a zero-wait OKAY. This keeps a stray access from hanging the
// bus. Timing: the error ends two cycles into the data phase.
//
// Paper vs. this design: the paper asks that tests cover unmapped regions of
// the memory map; answering them with an ERROR is this design's choice.
// HTRANS[0] (SEQ vs NONSEQ, IDLE vs BUSY) does not matter here, so that bit is
// read by nothing and a lint tool reports it unused.
`include "RTL.svh"
module ahb_default_slave (
  input  logic clk,
  input  logic rst_n,
  input  logic hsel,
  input  logic hready,
  input  logic [1:0] htrans,
  output logic hreadyout,
  output logic hresp
);
  typedef enum logic [1:0] {DS_IDLE, DS_ERR1, DS_ERR2} ds_state_e;
  ds_state_e state_q, state_d;

  always_comb begin
    state_d = state_q;
    case (state_q)
      DS_ERR1: state_d = DS_ERR2;
      default: state_d = (hsel && hready && htrans[1]) ? DS_ERR1 : DS_IDLE;
    endcase
  end
  `FF(state_d, state_q, clk, 1'b1, rst_n, DS_IDLE)

  always_comb begin
    hreadyout = (state_q != DS_ERR1);
    hresp     = (state_q != DS_IDLE);
  end
endmodule
