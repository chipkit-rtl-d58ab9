// tb_ahb_apb_bridge - self-checking test of the AHB-to-APB bridge.
//
// The bridge drives an APB testbench slave directly (with 0 or 2 wait
// states, built twice). Checked: write then read-back of random words,
// back-to-back AHB transfers, the AHB data-phase length (2 cycles with a
// zero-wait APB slave: SETUP + ACCESS; plus the APB wait states), and that
// PSLVERR comes back as an AHB ERROR (two-cycle response) without
// disturbing the next transfer.
//
// The paper only names the APB segment; the latencies checked here are
// those of this design's bridge.
module tb_ahb_apb_bridge;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ahb_if bus0 ();
  ahb_if bus2 ();
  apb_if apb0 ();
  apb_if apb2 ();
  ahb_apb_bridge dut0 (.clk, .rst_n, .ahb(bus0), .apb(apb0));
  ahb_apb_bridge dut2 (.clk, .rst_n, .ahb(bus2), .apb(apb2));
  apb_tb_slave #(.WAIT(0), .TAG(8'h00)) u_s0 (.clk, .rst_n, .apb(apb0));
  apb_tb_slave #(.WAIT(2), .TAG(8'h00)) u_s2 (.clk, .rst_n, .apb(apb2));
  ahb_tb_master u_m0 (.clk, .ahb(bus0));
  ahb_tb_master u_m2 (.clk, .ahb(bus2));
  assign bus0.hsel = 1'b1;  assign bus0.hready = bus0.hreadyout;
  assign bus2.hsel = 1'b1;  assign bus2.hready = bus2.hreadyout;

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [31:0] d [15];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 15; i++) begin
      d[i] = {8'h00, 24'($urandom)};
      u_m0.push(32'(i) << 2, 1'b1, d[i]);
      u_m2.push(32'(i) << 2, 1'b1, d[i]);
    end
    for (int i = 0; i < 15; i++) begin
      u_m0.push(32'(i) << 2, 1'b0, '0);
      u_m2.push(32'(i) << 2, 1'b0, '0);
    end
    // error slot, then a normal read right behind it
    u_m0.push(32'h3C, 1'b0, '0);  u_m0.push(32'h0, 1'b0, '0);
    u_m2.push(32'h3C, 1'b1, 32'h1); u_m2.push(32'h4, 1'b0, '0);
    fork u_m0.run(); u_m2.run(); join
    for (int i = 0; i < 15; i++) begin
      chk($sformatf("rd0 %0d", i), u_m0.r_data[15 + i] == d[i]);
      chk($sformatf("rd2 %0d", i), u_m2.r_data[15 + i] == d[i]);
    end
    for (int i = 0; i < 30; i++) begin
      chk($sformatf("lat0 %0d = %0d", i, u_m0.r_done[i] - u_m0.r_acc[i]), u_m0.r_done[i] - u_m0.r_acc[i] == 2);
      chk($sformatf("lat2 %0d = %0d", i, u_m2.r_done[i] - u_m2.r_acc[i]), u_m2.r_done[i] - u_m2.r_acc[i] == 4);
      chk("okay", !u_m0.r_resp[i] && !u_m2.r_resp[i]);
    end
    chk("err0", u_m0.r_resp[30] == 1'b1);
    chk("err2", u_m2.r_resp[30] == 1'b1);
    chk("err0 lat", u_m0.r_done[30] - u_m0.r_acc[30] == 3);
    chk("after err0", !u_m0.r_resp[31] && u_m0.r_data[31] == d[0]);
    chk("after err2", !u_m2.r_resp[31] && u_m2.r_data[31] == d[1]);
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
