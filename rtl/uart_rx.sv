// uart_rx - 8N1 UART receiver.
//
// The rx line is synchronized with two flops. A falling edge while idle
// starts a frame; the start bit is re-checked half a bit later, then each
// data bit (LSB first) and the stop bit are sampled in the middle of their
// bit time, clks_per_bit cycles apart. If the stop bit is 1 the byte is
// delivered with a one-cycle valid pulse; a frame with a bad stop bit or a
// start bit that vanished is dropped.
//
// Paper vs. this design: the UART is named by the paper; the 8N1 frame, the
// mid-bit sampling and the input synchronizer are this design's choices.
`include "RTL.svh"
module uart_rx (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] clks_per_bit,
  input  logic        rx,
  output logic [7:0]  data,
  output logic        valid
);
  typedef enum logic [1:0] {RX_IDLE, RX_START, RX_DATA, RX_STOP} rx_state_e;
  rx_state_e   state_q, state_d;
  logic        rx_s, rx_meta;
  logic [15:0] cnt_q, cnt_d;
  logic [2:0]  bit_q, bit_d;
  logic [7:0]  data_q, data_d;
  logic        valid_d, valid_q;

  // synchronizer resets to the idle (high) line level
  `FF(rx,      rx_meta, clk, 1'b1, rst_n, 1'b1)
  `FF(rx_meta, rx_s,    clk, 1'b1, rst_n, 1'b1)

  always_comb begin
    state_d = state_q;
    cnt_d   = cnt_q;
    bit_d   = bit_q;
    data_d  = data_q;
    valid_d = 1'b0;
    case (state_q)
      RX_IDLE: if (!rx_s) begin
        state_d = RX_START;
        cnt_d   = {1'b0, clks_per_bit[15:1]} - 16'd1;   // to mid start bit
      end
      RX_START: begin
        if (cnt_q != 16'd0) cnt_d = cnt_q - 16'd1;
        else if (rx_s)      state_d = RX_IDLE;           // glitch, not a start
        else begin
          state_d = RX_DATA;
          cnt_d   = clks_per_bit - 16'd1;
          bit_d   = 3'd0;
        end
      end
      RX_DATA: begin
        if (cnt_q != 16'd0) cnt_d = cnt_q - 16'd1;
        else begin
          data_d = {rx_s, data_q[7:1]};
          cnt_d  = clks_per_bit - 16'd1;
          bit_d  = bit_q + 3'd1;
          if (bit_q == 3'd7) state_d = RX_STOP;
        end
      end
      RX_STOP: begin
        if (cnt_q != 16'd0) cnt_d = cnt_q - 16'd1;
        else begin
          state_d = RX_IDLE;
          valid_d = rx_s;
        end
      end
      default: state_d = RX_IDLE;
    endcase
  end

  `FF(state_d, state_q, clk, 1'b1, rst_n, RX_IDLE)
  `FF(cnt_d,   cnt_q,   clk, 1'b1, rst_n, 16'd0)
  `FF(bit_d,   bit_q,   clk, 1'b1, rst_n, 3'd0)
  `FF(data_d,  data_q,  clk, 1'b1, rst_n, 8'd0)
  `FF(valid_d, valid_q, clk, 1'b1, rst_n, 1'b0)

  always_comb begin
    data  = data_q;
    valid = valid_q;
  end
endmodule
