// tb_uart_host - self-checking test of the UART bus master.
//
// A testbench serial port types commands at 8 clocks per bit; the host's
// AHB port drives a testbench slave (two wait states, read data tagged
// 0x5A in the top byte, ERROR for addresses 0xE0000000 and up). Checked:
// writes and reads in upper and lower case, with and without 0x, CR or LF
// endings; reply texts; data reaching the slave; a bus ERROR reported as
// "ERR"; malformed lines answered with "?" and no bus transfer; the number
// of AHB transfers; and the reply length in frames.
//
// The "R <hex address>" command form follows the paper; the write command,
// the replies and the error handling checked are this design's.
module tb_uart_host;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  localparam int CPB = 8;

  ahb_if bus ();
  logic rx, tx;
  uart_host #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .uart_rx(rx), .uart_tx(tx), .ahb(bus));
  ahb_tb_slave #(.WAIT(2), .TAG(8'h5A)) u_s (.clk, .rst_n, .ahb(bus));
  uart_tb_link #(.CPB(CPB)) u_pc (.clk, .txd(rx), .rxd(tx));
  assign bus.hsel   = 1'b1;
  assign bus.hready = bus.hreadyout;

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic cmd(input string c, input string exp);
    string r;
    u_pc.send_line(c);
    u_pc.get_line(r);
    chk($sformatf("'%s' -> '%s' (expected '%s')", c.substr(0, c.len() - 2), r, exp), r == exp);
  endtask

  initial begin
    int f0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    cmd("W 0x00000010 0x00ABCDEF\r", "OK");
    chk("write landed", u_s.mem[4] == 32'h00AB_CDEF);
    f0 = u_pc.n_frames;
    cmd("R 0x00000010\r", "5AABCDEF");
    chk("read reply is 10 frames", u_pc.n_frames - f0 == 10);
    cmd("w 20 dEaDbEeF\n", "OK");
    chk("lower-case hex write", u_s.mem[8] == 32'hDEAD_BEEF);
    cmd("r 0x22\r", "5AADBEEF");          // address bits [1:0] ignored
    cmd("R  0X14\r", "5A000000");
    cmd("W 0xFC 12345678\r", "OK");
    cmd("R FC\r", "5A345678");
    cmd("R 0xE0000000\r", "ERR");
    cmd("W 0xE0000004 1\r", "ERR");
    chk("transfers so far", u_s.n_xfer == 9);
    cmd("R 0xZZ\r", "?");
    cmd("W 10\r", "?");
    cmd("R\r", "?");
    cmd("Q 0x10 garbage\r", "?");          // unknown command letter
    u_pc.send_line("\r\n  \n");               // blank lines: no reply
    repeat (30 * CPB) @(posedge clk);
    chk("no reply to blank lines", u_pc.rx_buf == "");
    cmd("R 10\r", "5AABCDEF");
    chk("malformed lines made no transfer", u_s.n_xfer == 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
