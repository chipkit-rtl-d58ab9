// tb_apb_uart - self-checking test of the APB UART slave.
//
// BAUDDIV is set to 16 cycles per bit. Checked: bytes written to DATA come
// out on uart_tx as 8N1 frames with the right bits and bit time (decoded by
// the testbench, which also measures the frame length); STATUS.TX_BUSY while
// sending; a write while busy sets TX_OVR and is not sent; bytes sent into
// uart_rx appear in DATA with RX_VALID and the interrupt, and a second byte
// before the first is read sets RX_OVR; write-1-to-clear of both flags.
//
// The paper names the UART slaves and their printf use; registers, flags
// and frame format checked are this design's.
module tb_apb_uart;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  localparam int CPB = 16;

  apb_if bus ();
  logic rxd = 1'b1, txd, irq;
  apb_uart #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .apb(bus), .uart_rx(rxd), .uart_tx(txd), .irq);
  apb_tb_master u_m (.clk, .apb(bus));

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // serial receiver: records every frame seen on txd and its length
  byte got[$];
  int  bit_cycles[$];
  initial begin
    forever begin
      logic [7:0] b; int t0, t1;
      @(negedge txd);
      t0 = $time;
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = txd; end
      repeat (CPB) @(posedge clk);
      if (txd !== 1'b1) $display("FAIL stop bit");
      @(posedge txd or posedge clk);
      t1 = $time;
      got.push_back(b);
      bit_cycles.push_back((t1 - t0) / 10);
    end
  end

  task automatic send_serial(input byte b);
    rxd = 1'b0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(posedge clk); end
    rxd = 1'b1; repeat (CPB) @(posedge clk);
  endtask

  initial begin
    logic [31:0] rd;
    repeat (3) @(posedge clk);
    rst_n = 1;
    u_m.read(32'h8, rd);
    chk("bauddiv reset", rd == CPB);
    u_m.write(32'h8, CPB);
    // transmit two bytes
    u_m.write(32'h0, 32'h0000_00A5);
    u_m.read(32'h4, rd);
    chk("tx busy", rd[0] == 1'b1);
    u_m.write(32'h0, 32'h0000_0077);       // busy: dropped, overrun
    u_m.read(32'h4, rd);
    chk("tx overrun flag", rd[3] == 1'b1);
    u_m.write(32'h4, 32'h8);
    u_m.read(32'h4, rd);
    chk("tx overrun cleared", rd[3] == 1'b0);
    do u_m.read(32'h4, rd); while (rd[0]);
    u_m.write(32'h0, 32'h0000_003C);
    do u_m.read(32'h4, rd); while (rd[0]);
    repeat (CPB * 2) @(posedge clk);
    chk($sformatf("two frames seen (%0d)", got.size()), got.size() == 2);
    if (got.size() == 2) begin
      chk("frame 0 data", got[0] == 8'hA5);
      chk("frame 1 data", got[1] == 8'h3C);
      // start edge to the end of the stop bit: 10 bit times (sampled mid-stop)
      chk($sformatf("frame length %0d", bit_cycles[0]), bit_cycles[0] >= 9 * CPB + CPB / 2 && bit_cycles[0] <= 10 * CPB + 1);
    end
    // receive
    chk("no irq", irq == 1'b0);
    send_serial(8'h5E);
    repeat (4) @(posedge clk);
    chk("irq on rx", irq == 1'b1);
    u_m.read(32'h4, rd);
    chk("rx valid", rd[1] == 1'b1);
    u_m.read(32'h0, rd);
    chk($sformatf("rx data %h", rd), rd == 32'h5E);
    u_m.read(32'h4, rd);
    chk("rx valid cleared", rd[1] == 1'b0 && irq == 1'b0);
    send_serial(8'h01);
    send_serial(8'hF0);
    repeat (4) @(posedge clk);
    u_m.read(32'h4, rd);
    chk("rx overrun", rd[2] == 1'b1 && rd[1] == 1'b1);
    u_m.read(32'h0, rd);
    chk("rx newest byte kept", rd == 32'hF0);
    u_m.write(32'h4, 32'h4);
    u_m.read(32'h4, rd);
    chk("rx overrun cleared", rd[2] == 1'b0);
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
