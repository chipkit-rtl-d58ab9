// sram_sp - single-port synchronous SRAM with byte write enables.
//
// This is the functional model behind the SRAM macro wrapper: a chip build
// swaps this file for one that instantiates the compiled macro, keeping the
// ports. One access per cycle: with cs high, we high writes wdata into the
// enabled bytes of word addr; we low reads word addr, whose data appears on
// rdata after the clock edge and is held until the next read. The array has
// no reset, as a real SRAM powers up with unknown contents.
//
// Paper vs. this design: the paper instantiates SRAM macros through a wrapper
// so the process-specific part can be swapped; this behavioural array (which
// synthesis maps to memory) and its port list are this design's choice.
module sram_sp #(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          cs,
  input  logic          we,
  input  logic [3:0]    be,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (cs) begin
      if (we) begin
        for (int b = 0; b < 4; b++)
          if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
