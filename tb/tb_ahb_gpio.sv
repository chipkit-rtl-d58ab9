// tb_ahb_gpio - self-checking test of the AHB GPIO block (16 pins).
//
// Writes DATA_OUT and DIR and checks the pins and the read-back values,
// drives random pin inputs and checks DATA_IN after the synchronizer delay
// (value visible to a read issued 3 cycles after the pins change), and
// checks that a write to the read-only DATA_IN changes nothing.
//
// The paper only names GPIO; the register layout checked is this design's.
module tb_ahb_gpio;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ahb_if bus ();
  logic [15:0] gin, gout, goe;
  ahb_gpio dut (.clk, .rst_n, .ahb(bus), .gpio_in(gin), .gpio_out(gout), .gpio_oe(goe));
  ahb_tb_master u_m (.clk, .ahb(bus));
  assign bus.hsel   = 1'b1;
  assign bus.hready = bus.hreadyout;

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    gin = 16'h0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    chk("reset out", gout == 16'h0 && goe == 16'h0);
    for (int k = 0; k < 20; k++) begin
      logic [15:0] o, e, in;
      o = 16'($urandom); e = 16'($urandom); in = 16'($urandom);
      u_m.push(32'h0, 1'b1, {16'hFFFF, o});
      u_m.push(32'h4, 1'b1, {16'hFFFF, e});
      u_m.push(32'h8, 1'b1, 32'hFFFF_FFFF);      // read-only: ignored
      u_m.push(32'h0, 1'b0, '0);
      u_m.push(32'h4, 1'b0, '0);
      u_m.run();
      chk("pins out", gout == o);
      chk("pins oe", goe == e);
      chk("read out", u_m.r_data[3] == {16'h0, o});
      chk("read dir", u_m.r_data[4] == {16'h0, e});
      @(negedge clk) gin = in;
      repeat (2) @(negedge clk);
      u_m.push(32'h8, 1'b0, '0);
      u_m.run();
      chk($sformatf("read in %h exp %h", u_m.r_data[0], in), u_m.r_data[0] == {16'h0, in});
      chk("zero wait", u_m.r_done[0] - u_m.r_acc[0] == 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
