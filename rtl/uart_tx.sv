// uart_tx - 8N1 UART transmitter.
//
// When idle (ready high) a byte offered with valid is taken and sent as one
// start bit (0), eight data bits LSB first and one stop bit (1), each bit
// lasting clks_per_bit clock cycles. ready rises again after the stop bit,
// so a byte occupies the line for 10 * clks_per_bit cycles. tx idles high.
//
// Paper vs. this design: the UART is named by the paper; the 8N1 frame and the
// runtime divider input are this design's choices.
`include "RTL.svh"
module uart_tx (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] clks_per_bit,
  input  logic [7:0]  data,
  input  logic        valid,
  output logic        ready,
  output logic        tx
);
  logic [9:0]  shift_q, shift_d;     // stop, data[7:0], start; LSB goes out
  logic [3:0]  bits_q, bits_d;       // bits still to send, 0 = idle
  logic [15:0] cnt_q, cnt_d;

  always_comb begin
    shift_d = shift_q;
    bits_d  = bits_q;
    cnt_d   = cnt_q;
    if (bits_q == 4'd0) begin
      if (valid) begin
        shift_d = {1'b1, data, 1'b0};
        bits_d  = 4'd10;
        cnt_d   = clks_per_bit - 16'd1;
      end
    end else if (cnt_q == 16'd0) begin
      shift_d = {1'b1, shift_q[9:1]};
      bits_d  = bits_q - 4'd1;
      cnt_d   = clks_per_bit - 16'd1;
    end else begin
      cnt_d = cnt_q - 16'd1;
    end
  end

  `FF(shift_d, shift_q, clk, 1'b1, rst_n, 10'h3FF)
  `FF(bits_d,  bits_q,  clk, 1'b1, rst_n, 4'd0)
  `FF(cnt_d,   cnt_q,   clk, 1'b1, rst_n, 16'd0)

  always_comb begin
    ready = (bits_q == 4'd0);
    tx    = (bits_q == 4'd0) ? 1'b1 : shift_q[0];
  end
endmodule
