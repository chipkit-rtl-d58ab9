// uart_tb_link - testbench serial port: sends text to a UART and collects
// what comes back.
//
// send_line() transmits each character of a string as an 8N1 frame of
// CPB clock cycles per bit on txd. A receiver process decodes every frame
// arriving on rxd (sampling mid-bit) and appends it to rx_buf.
// get_line() waits, up to a cycle limit, for a line ending in LF and
// returns it without the CR LF.
//
// Test infrastructure only: it stands in for the PC and its USB-UART cable.
module uart_tb_link #(
  parameter int CPB = 8
) (
  input  logic clk,
  output logic txd,
  input  logic rxd
);
  string rx_buf = "";
  int    n_frames = 0;

  initial txd = 1'b1;

  initial begin
    forever begin
      logic [7:0] b;
      @(negedge rxd);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = rxd; end
      repeat (CPB) @(posedge clk);
      rx_buf = {rx_buf, string'(b)};
      n_frames++;
    end
  end

  task automatic send_byte(input logic [7:0] b);
    txd = 1'b0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin txd = b[i]; repeat (CPB) @(posedge clk); end
    txd = 1'b1; repeat (CPB) @(posedge clk);
  endtask

  task automatic send_line(input string s);
    for (int i = 0; i < s.len(); i++) send_byte(s[i]);
  endtask

  task automatic get_line(output string line, input int max_cycles = 100000);
    int p, n;
    line = "";
    n = 0;
    p = -1;
    while (p < 0 && n < max_cycles) begin
      for (int i = 0; i < rx_buf.len(); i++) if (rx_buf[i] == 8'h0A) begin p = i; break; end
      if (p < 0) begin @(posedge clk); n++; end
    end
    if (p < 0) begin line = "<timeout>"; return; end
    line   = (p >= 2) ? rx_buf.substr(0, p - 2) : "";
    rx_buf = (p + 1 < rx_buf.len()) ? rx_buf.substr(p + 1, rx_buf.len() - 1) : "";
  endtask
endmodule
