// diag_mux - debug-signal multiplexer for the DIAG pins.
//
// Each of N_DIAG output pins shows one of N_SRC internal signals (clocks,
// resets, interrupts, FSM bits, ...), picked by its SEL_W-bit field of sel,
// which comes from a memory-mapped CSR. With two or more pins, two signals
// can be watched against each other, for example a clock and a reset.
// A select beyond N_SRC-1 outputs 0. Purely combinational, so the pins
// follow the selected signals with only gate delay.
//
// Paper vs. this design: a DIAG pin multiplexer steered by CSRs, with at least
// two pins so that two signals can be compared, follows the paper. The pin
// count and the select encoding are this design's choices.
module diag_mux #(
  parameter int unsigned N_DIAG = 2,
  parameter int unsigned N_SRC  = 16,
  parameter int unsigned SEL_W  = $clog2(N_SRC)
) (
  input  logic [N_SRC-1:0]        src,
  input  logic [N_DIAG*SEL_W-1:0] sel,
  output logic [N_DIAG-1:0]       diag
);
  always_comb begin
    for (int i = 0; i < int'(N_DIAG); i++) begin
      diag[i] = 1'b0;
      for (int j = 0; j < int'(N_SRC); j++)
        if (sel[i*SEL_W +: SEL_W] == SEL_W'(j)) diag[i] = src[j];
    end
  end
endmodule
