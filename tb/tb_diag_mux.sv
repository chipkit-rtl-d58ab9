// tb_diag_mux - self-checking test of the DIAG pin multiplexer.
//
// For every select value on each of the two pins, with random source
// patterns, the pin must equal the selected source bit.
//
// The paper describes the DIAG multiplexer; the select encoding checked is
// this design's.
module tb_diag_mux;
  int checks = 0, failures = 0;
  logic [15:0] src;
  logic [7:0]  sel;
  logic [1:0]  diag;
  diag_mux dut (.src, .sel, .diag);

  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      for (int a = 0; a < 16; a++) begin
        int b;
        b = (a * 7 + rep) % 16;
        src = 16'($urandom);
        sel = {4'(b), 4'(a)};
        #1;
        checks++;
        if (diag[0] !== src[a] || diag[1] !== src[b]) begin
          failures++;
          $display("FAIL sel %0d/%0d src %h diag %b", a, b, src, diag);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
