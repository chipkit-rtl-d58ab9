// tb_apb_watchdog - self-checking test of the watchdog timer.
//
// Checked: VALUE counts down one per cycle once enabled; regular KICK
// writes keep it from expiring; after the last kick it times out LOAD+1
// cycles later (measured), raising the interrupt; with RESET_EN set the
// PCB reset output goes low and stays low; TIMEOUT is write-1-to-clear;
// with RESET_EN clear a timeout gives only the interrupt.
//
// The paper names the watchdog and the PCB reset line; the registers and
// the timing checked are this design's.
module tb_apb_watchdog;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  apb_if bus ();
  logic irq, wrst_n;
  apb_watchdog dut (.clk, .rst_n, .apb(bus), .irq, .wdog_reset_n(wrst_n));
  apb_tb_master u_m (.clk, .apb(bus));

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [31:0] v0, v1; int t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    chk("reset idle", irq == 1'b0 && wrst_n == 1'b1);
    u_m.write(32'h00, 32'd100);
    u_m.write(32'h08, 32'h1);            // enable (reloads), no reset
    u_m.read(32'h04, v0);
    u_m.read(32'h04, v1);
    chk($sformatf("counts down %0d -> %0d", v0, v1), v0 - v1 == 3 && v0 <= 100);
    for (int i = 0; i < 10; i++) begin
      repeat (60) @(posedge clk);
      u_m.write(32'h0C, 32'h0);
    end
    chk("kicked: no timeout", irq == 1'b0);
    @(posedge clk) t0 = cyc;   // the kick completed just before
    wait (irq == 1'b1);
    t1 = cyc;
    chk($sformatf("timeout after %0d cycles", t1 - t0), t1 - t0 >= 100 && t1 - t0 <= 103);
    chk("no reset without RESET_EN", wrst_n == 1'b1);
    u_m.write(32'h10, 32'h1);
    chk("timeout cleared", irq == 1'b0);
    u_m.write(32'h08, 32'h3);            // reset enable
    u_m.write(32'h0C, 32'h0);
    wait (wrst_n == 1'b0);
    chk("reset asserted with irq", irq == 1'b1);
    repeat (300) @(posedge clk);
    chk("reset held", wrst_n == 1'b0);
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
