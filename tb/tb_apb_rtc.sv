// tb_apb_rtc - self-checking test of the real-time counter.
//
// Drives rtc_osc with a slow clock (period 40.6 HCLK cycles, not aligned to
// HCLK) and checks that COUNT advances by exactly one per oscillator rising
// edge, that it stops when CTRL.ENABLE is 0, and that writing COUNT loads it.
//
// The paper gives the RTC's purpose (timing workloads); the registers and
// the sampling scheme checked are this design's.
module tb_apb_rtc;
  logic clk = 0, rst_n = 0, osc = 0;
  int checks = 0, failures = 0;
  int edges = 0;
  always #5 clk = ~clk;
  always #203 osc = ~osc;
  always @(posedge osc) edges++;

  apb_if bus ();
  apb_rtc dut (.clk, .rst_n, .apb(bus), .rtc_osc(osc));
  apb_tb_master u_m (.clk, .apb(bus));

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [31:0] rd, c0; int e0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    u_m.read(32'h4, rd);
    chk("enabled at reset", rd == 32'h1);
    @(negedge osc); repeat (4) @(negedge clk);   // away from an edge
    u_m.read(32'h0, c0); e0 = edges;
    repeat (1200) @(posedge clk);
    @(negedge osc); repeat (4) @(negedge clk);
    u_m.read(32'h0, rd);
    chk($sformatf("count %0d over %0d edges", rd - c0, edges - e0), rd - c0 == 32'(edges - e0) && edges > e0 + 20);
    u_m.write(32'h4, 32'h0);
    u_m.read(32'h0, c0);
    repeat (1200) @(posedge clk);
    u_m.read(32'h0, rd);
    chk("stopped when disabled", rd == c0);
    u_m.write(32'h0, 32'hFFFF_FFF0);
    u_m.read(32'h0, rd);
    chk("load", rd == 32'hFFFF_FFF0);
    u_m.write(32'h4, 32'h1);
    @(negedge osc); repeat (4) @(negedge clk);
    e0 = edges;
    u_m.read(32'h0, c0);
    repeat (1000) @(posedge clk);
    @(negedge osc); repeat (4) @(negedge clk);
    u_m.read(32'h0, rd);
    chk($sformatf("counting again %0d vs %0d", rd - c0, edges - e0), rd - c0 == 32'(edges - e0) && rd != c0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
