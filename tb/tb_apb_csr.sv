// tb_apb_csr - self-checking test of the CSR block.
//
// Checked: ID value; SCRATCH holds walking-one and random patterns on all
// 32 bits; DIAG_SEL fields reach the diag_sel output (pin i from bits
// [8*i +: 4]); CTRL drives accel_rst_n (0 after reset) and the chicken
// bits; CYCLES advances by the number of cycles between two reads; ID is
// read-only.
//
// The paper describes generated CSRs for experiment control and software-
// controlled resets; the register map checked is this design's.
module tb_apb_csr;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  apb_if bus ();
  logic [7:0]  dsel;
  logic        arst_n;
  logic [23:0] chick;
  apb_csr dut (.clk, .rst_n, .apb(bus), .diag_sel(dsel), .accel_rst_n(arst_n), .chicken(chick));
  apb_tb_master u_m (.clk, .apb(bus));

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [31:0] rd, c0; int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    chk("accel held in reset", arst_n == 1'b0);
    u_m.read(32'h00, rd);
    chk("id", rd == 32'hC41B_0001);
    u_m.write(32'h00, 32'h0);
    u_m.read(32'h00, rd);
    chk("id read-only", rd == 32'hC41B_0001);
    for (int b = 0; b < 32; b++) begin
      u_m.write(32'h04, 32'h1 << b);
      u_m.read(32'h04, rd);
      chk($sformatf("scratch bit %0d", b), rd == 32'h1 << b);
    end
    u_m.write(32'h08, 32'h0000_0B05);
    chk("diag sel pin0", dsel[3:0] == 4'h5);
    chk("diag sel pin1", dsel[7:4] == 4'hB);
    u_m.write(32'h0C, 32'hABCD_EF01);
    chk("accel reset released", arst_n == 1'b1);
    chk("chicken bits", chick == 24'hABCD_EF);
    u_m.read(32'h0C, rd);
    chk("ctrl readback", rd == 32'hABCD_EF01);
    u_m.read(32'h10, c0);
    t0 = cyc;
    repeat (50) @(posedge clk);
    u_m.read(32'h10, rd);
    // both reads sample PRDATA at the same point of their transfer, so the
    // counter must have advanced by the clock edges between the two returns
    chk($sformatf("cycle counter delta %0d vs %0d", rd - c0, cyc - t0), rd - c0 == 32'(cyc - t0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
