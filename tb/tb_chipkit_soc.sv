// tb_chipkit_soc - end-to-end test of the SoC subsystem at its default size.
//
// The chip is hosted from a "PC": a serial port model types UART-host
// commands at 115200 baud (868 HCLK cycles per bit) and reads the replies,
// exactly as a test script would. At the same time a CPU-side testbench
// master drives the CPU's AHB port, so the two bus masters contend. A
// second serial port model plays the console on the UART slave, a testbench
// slave stands in for the custom accelerator, the RTC oscillator is a slow
// free-running clock, and a board-reset model answers the watchdog's PCB
// reset request by pulsing RESETn.
// Every mechanism is counted and must have happened at least once:
//   host write / host read / host ERR (unmapped AHB) / APB PSLVERR,
//   IMEM + DMEM lowest and highest word, SRAM read-after-write wait state,
//   master contention (CPU held while the host owns the bus),
//   GPIO output + input, console TX + RX (with interrupt), second UART,
//   RTC advancing, DIAG mux switching, accelerator access and reset control,
//   watchdog timeout -> PCB reset -> chip reset.
//
// Hosting from a PC over the UART host with commands like "R 0x70000000",
// the two masters, the DIAG pins and the PCB reset follow the paper; the
// baud rate, the command replies and the sequence of the test are this
// design's.
module tb_chipkit_soc;
  logic HCLK = 0, RESETn = 0;
  int checks = 0, failures = 0;
  always #5 HCLK = ~HCLK;
  localparam int CPB = 868;       // default CLKS_PER_BIT of the design

  // mechanism counters
  int n_host_wr = 0, n_host_rd = 0, n_host_err = 0, n_apb_err = 0, n_raw_wait = 0,
      n_contention = 0, n_gpio = 0, n_con_tx = 0, n_con_rx = 0, n_rtc = 0, n_diag = 0,
      n_accel = 0, n_wdog_reset = 0, n_mem_edges = 0,
      n_uart1 = 0;

  logic        uh_rxd, uh_txd, uart_rxd, uart_txd, uart1_rxd, uart1_txd, rtc_osc = 0, pcb_reset_n;
  logic [15:0] gpio_in, gpio_out, gpio_oe;
  logic [1:0]  diag;
  logic [3:0]  cpu_irq;
  logic        accel_rst_n;
  logic [23:0] accel_chicken;

  ahb_if cpu ();
  ahb_if acc ();

  always #2003 rtc_osc = ~rtc_osc;

  chipkit_soc dut (
    .HCLK, .RESETn,
    .uh_rxd, .uh_txd, .uart_rxd, .uart_txd, .uart1_rxd, .uart1_txd,
    .gpio_in, .gpio_out, .gpio_oe,
    .rtc_osc, .diag, .pcb_reset_n,
    .cpu_haddr(cpu.haddr), .cpu_htrans(cpu.htrans), .cpu_hwrite(cpu.hwrite), .cpu_hsize(cpu.hsize),
    .cpu_hburst(cpu.hburst), .cpu_hprot(cpu.hprot), .cpu_hmastlock(cpu.hmastlock),
    .cpu_hwdata(cpu.hwdata), .cpu_hrdata(cpu.hrdata), .cpu_hready(cpu.hready), .cpu_hresp(cpu.hresp),
    .cpu_irq,
    .accel_hsel(acc.hsel), .accel_haddr(acc.haddr), .accel_htrans(acc.htrans),
    .accel_hwrite(acc.hwrite), .accel_hsize(acc.hsize), .accel_hwdata(acc.hwdata),
    .accel_hready(acc.hready), .accel_hreadyout(acc.hreadyout), .accel_hrdata(acc.hrdata),
    .accel_hresp(acc.hresp), .accel_irq(1'b0), .accel_rst_n, .accel_chicken
  );
  assign acc.hburst = 3'b000; assign acc.hprot = 4'b0011; assign acc.hmastlock = 1'b0;

  ahb_tb_master u_cpu (.clk(HCLK), .ahb(cpu));
  ahb_tb_slave #(.WAIT(1), .TAG(8'hAC)) u_acc (.clk(HCLK), .rst_n(RESETn), .ahb(acc));
  uart_tb_link #(.CPB(CPB)) u_pc  (.clk(HCLK), .txd(uh_rxd),   .rxd(uh_txd));
  uart_tb_link #(.CPB(CPB)) u_con (.clk(HCLK), .txd(uart_rxd), .rxd(uart_txd));
  uart_tb_link #(.CPB(CPB)) u_aux (.clk(HCLK), .txd(uart1_rxd), .rxd(uart1_txd));

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic host_w(input logic [31:0] a, input logic [31:0] d, input string exp = "OK");
    string r;
    u_pc.send_line($sformatf("W 0x%08h 0x%08h\r", a, d));
    u_pc.get_line(r, 2_000_000);
    chk($sformatf("host W %h %h -> %s", a, d, r), r == exp);
    if (r == "OK") n_host_wr++;
    if (r == "ERR") n_host_err++;
  endtask

  task automatic host_r(input logic [31:0] a, output logic [31:0] d, input string exp = "");
    string r;
    u_pc.send_line($sformatf("R 0x%08h\r", a));
    u_pc.get_line(r, 2_000_000);
    d = '0;
    if (r.len() == 8) begin
      void'($sscanf(r, "%h", d));
      n_host_rd++;
    end
    if (r == "ERR") n_host_err++;
    if (exp != "") chk($sformatf("host R %h -> %s (expected %s)", a, r, exp), r == exp);
  endtask

  task automatic host_rchk(input logic [31:0] a, input logic [31:0] exp);
    logic [31:0] d;
    string e;
    e = $sformatf("%08h", exp);
    host_r(a, d, e.toupper());
  endtask

  initial begin
    logic [31:0] d, d2;
    int cpu_last;
    gpio_in = 16'h0;
    repeat (5) @(posedge HCLK);
    RESETn = 1;
    repeat (10) @(posedge HCLK);

    // --- memories: lowest and highest word of IMEM and DMEM, via the host
    host_w(32'h0000_0000, 32'h1234_5678);
    host_w(32'h0000_FFFC, 32'h8765_4321);
    host_w(32'h2000_0000, 32'hA5A5_5A5A);
    host_w(32'h2000_FFFC, 32'hFFFF_0000);
    host_rchk(32'h0000_0000, 32'h1234_5678);
    host_rchk(32'h0000_FFFC, 32'h8765_4321);
    host_rchk(32'h2000_0000, 32'hA5A5_5A5A);
    host_rchk(32'h2000_FFFC, 32'hFFFF_0000);
    n_mem_edges++;

    // --- CPU master: write/read-back on DMEM, read right after write
    u_cpu.push(32'h2000_0100, 1'b1, 32'hC0DE_0001);
    u_cpu.push(32'h2000_0100, 1'b0, '0);
    u_cpu.run();
    chk("cpu readback", u_cpu.r_data[1] == 32'hC0DE_0001);
    chk("read-after-write wait state", u_cpu.r_done[1] - u_cpu.r_acc[1] == 2);
    if (u_cpu.r_done[1] - u_cpu.r_acc[1] == 2) n_raw_wait++;

    // --- contention: CPU writes with idle gaps while the host issues commands
    begin
      bit host_done;
      int k;
      host_done = 0;
      k = 0;
      fork
        while (!host_done) begin
          for (int i = 0; i < 256; i++) u_cpu.push(32'h2000_0200 + 32'(4 * i), 1'b1, 32'(k + i), 3'b010, 1);
          u_cpu.run();
          k += 256;
        end
        begin
          host_w(32'h2000_1000, 32'h0BAD_F00D);
          host_rchk(32'h2000_1000, 32'h0BAD_F00D);
          host_done = 1;
        end
      join
      cpu_last = k - 256;
    end
    chk($sformatf("cpu held by host %0d cycles", u_cpu.held), u_cpu.held > 0);
    n_contention += u_cpu.held;
    for (int i = 0; i < 4; i++) u_cpu.push(32'h2000_0200 + 32'(4 * i), 1'b0, '0);
    u_cpu.run();
    for (int i = 0; i < 4; i++) chk("cpu stream landed", u_cpu.r_data[i] == 32'(cpu_last + i));

    // --- unmapped AHB address: default slave error; APB hole: PSLVERR
    host_r(32'h9000_0000, d, "ERR");
    host_w(32'h0001_0000, 32'h1, "ERR");
    host_r(32'h5000_5000, d, "ERR");
    if (n_host_err == 3) n_apb_err++;
    chk("errors counted", n_host_err == 3);

    // --- GPIO
    host_w(32'h4000_0000, 32'h0000_BEEF);
    host_w(32'h4000_0004, 32'h0000_FF00);
    chk("gpio pins", gpio_out == 16'hBEEF && gpio_oe == 16'hFF00);
    gpio_in = 16'h3C5A;
    host_rchk(32'h4000_0008, 32'h0000_3C5A);
    if (gpio_out == 16'hBEEF) n_gpio++;

    // --- console UART: transmit a character, then receive one
    host_w(32'h5000_0000, 32'h0000_0004);          // ASCII EOT, "end of test" code
    wait (u_con.n_frames == 1);
    chk("console tx char", u_con.rx_buf == "\x04");
    if (u_con.rx_buf == "\x04") n_con_tx++;
    u_con.send_byte(8'h47);
    repeat (10) @(posedge HCLK);
    chk("console rx interrupt", cpu_irq[0] == 1'b1);
    host_rchk(32'h5000_0000, 32'h0000_0047);
    chk("interrupt cleared by read", cpu_irq[0] == 1'b0);
    n_con_rx++;

    // --- second UART slave: one character each way, on its own pins and irq
    host_w(32'h5000_4000, 32'h0000_0055);
    wait (u_aux.n_frames == 1);
    chk("uart1 tx char", u_aux.rx_buf == "U" && u_con.n_frames == 1);
    u_aux.send_byte(8'h31);
    repeat (10) @(posedge HCLK);
    chk("uart1 rx interrupt", cpu_irq[3] == 1'b1 && cpu_irq[0] == 1'b0);
    host_rchk(32'h5000_4000, 32'h0000_0031);
    chk("uart1 interrupt cleared", cpu_irq[3] == 1'b0);
    if (u_aux.rx_buf == "U") n_uart1++;

    // --- RTC advances between two reads
    host_r(32'h5000_1000, d);
    host_r(32'h5000_1000, d2);
    chk($sformatf("rtc advanced %0d", d2 - d), d2 > d);
    if (d2 > d) n_rtc++;

    // --- CSR: ID, DIAG select, accelerator reset
    host_rchk(32'h5000_3000, 32'hC41B_0001);
    host_w(32'h5000_3008, 32'h0000_0F01);          // pin0 = RESETn, pin1 = constant 1
    chk("diag shows RESETn and 1", diag == 2'b11);
    host_w(32'h5000_3008, 32'h0000_0302);          // pin0 = pcb_reset_n, pin1 = accel_rst_n
    chk("diag shows pcb reset and accel reset", diag == 2'b01);
    host_w(32'h5000_300C, 32'h0000_0001);
    chk("accel reset released", accel_rst_n == 1'b1 && diag == 2'b11);
    n_diag++;

    // --- custom accelerator port
    host_w(32'h7000_0040, 32'h0012_3456);
    host_rchk(32'h7000_0040, 32'hAC12_3456);
    chk("accel slave saw 2 transfers", u_acc.n_xfer == 2);
    n_accel++;

    // --- watchdog: short timeout with reset enabled -> PCB reset
    host_w(32'h5000_2000, 32'd1000);
    host_w(32'h5000_2008, 32'h3);
    fork : wd
      begin wait (pcb_reset_n == 1'b0); end
      begin repeat (20000) @(posedge HCLK); end
    join_any
    disable wd;
    chk("watchdog pulled PCB reset", pcb_reset_n == 1'b0);
    chk("watchdog interrupt", cpu_irq[1] == 1'b1);
    // board model: the PCB reset line resets the chip
    repeat (3) @(posedge HCLK);
    RESETn = 0;
    repeat (3) @(posedge HCLK);
    RESETn = 1;
    repeat (3) @(posedge HCLK);
    chk("reset released", pcb_reset_n == 1'b1 && cpu_irq[1] == 1'b0 && accel_rst_n == 1'b0);
    host_rchk(32'h5000_3008, 32'h0);               // CSRs back to reset values
    host_rchk(32'h2000_FFFC, 32'hFFFF_0000);       // SRAM contents survive a reset
    if (pcb_reset_n) n_wdog_reset++;

    $display("mechanisms: host_wr=%0d host_rd=%0d host_err=%0d apb_err=%0d raw_wait=%0d contention=%0d gpio=%0d con_tx=%0d con_rx=%0d rtc=%0d diag=%0d accel=%0d wdog_reset=%0d mem_edges=%0d uart1=%0d",
             n_host_wr, n_host_rd, n_host_err, n_apb_err, n_raw_wait, n_contention, n_gpio, n_con_tx,
             n_con_rx, n_rtc, n_diag, n_accel, n_wdog_reset, n_mem_edges, n_uart1);
    chk("host write happened", n_host_wr > 0);
    chk("host read happened", n_host_rd > 0);
    chk("host error happened", n_host_err > 0);
    chk("apb error happened", n_apb_err > 0);
    chk("sram wait happened", n_raw_wait > 0);
    chk("contention happened", n_contention > 0);
    chk("gpio happened", n_gpio > 0);
    chk("console tx happened", n_con_tx > 0);
    chk("console rx happened", n_con_rx > 0);
    chk("second uart used", n_uart1 > 0);
    chk("rtc happened", n_rtc > 0);
    chk("diag happened", n_diag > 0);
    chk("accel happened", n_accel > 0);
    chk("watchdog reset happened", n_wdog_reset > 0);
    chk("memory edges happened", n_mem_edges > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12_000_000) @(posedge HCLK);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
