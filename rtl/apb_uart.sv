// apb_uart - UART slave peripheral on the APB bus.
//
// Lets on-chip software print (printf retargeted to the DATA register) and
// read characters from a PC terminal. One-byte transmit and receive
// buffers; software polls STATUS or uses the interrupt. Registers:
//   0x0 DATA    W: send a byte (dropped, and TX_OVR set, if the
//                  transmitter is busy)   R: received byte, clears RX_VALID
//   0x4 STATUS  R: bit0 TX_BUSY, bit1 RX_VALID, bit2 RX_OVR, bit3 TX_OVR
//               W: writing 1 to bit2 / bit3 clears that flag
//   0x8 BAUDDIV RW: clock cycles per bit (reset CLKS_PER_BIT)
// irq is RX_VALID. APB accesses complete without wait states (PREADY=1)
// and never signal PSLVERR.
//
// Paper vs. this design: the paper's UART slaves carry retargeted printf()
// output and, in simulation, the end-of-test code. The buffering, register
// layout, overrun flags and programmable divider are this design's choices.
`include "RTL.svh"
module apb_uart #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic clk,
  input  logic rst_n,
  apb_if.slave apb,
  input  logic uart_rx,
  output logic uart_tx,
  output logic irq
);
  logic        wr, rd;
  logic [3:2]  reg_idx;
  logic [15:0] div_q;
  logic        tx_ready, tx_valid;
  logic [7:0]  rx_byte, rx_data_q;
  logic        rx_valid, rx_full_q, rx_full_d, rx_ovr_q, rx_ovr_d, tx_ovr_q, tx_ovr_d;

  always_comb begin
    wr      = apb.psel && apb.penable && apb.pwrite;
    rd      = apb.psel && apb.penable && !apb.pwrite;
    reg_idx = apb.paddr[3:2];
    tx_valid = wr && (reg_idx == 2'd0);
  end

  uart_tx u_tx (.clk, .rst_n, .clks_per_bit(div_q), .data(apb.pwdata[7:0]), .valid(tx_valid),
                .ready(tx_ready), .tx(uart_tx));
  uart_rx u_rx (.clk, .rst_n, .clks_per_bit(div_q), .rx(uart_rx), .data(rx_byte), .valid(rx_valid));

  always_comb begin
    rx_full_d = rx_full_q;
    rx_ovr_d  = rx_ovr_q;
    tx_ovr_d  = tx_ovr_q;
    if (rd && reg_idx == 2'd0) rx_full_d = 1'b0;
    if (rx_valid) begin
      if (rx_full_d) rx_ovr_d = 1'b1;
      rx_full_d = 1'b1;
    end
    if (tx_valid && !tx_ready) tx_ovr_d = 1'b1;
    if (wr && reg_idx == 2'd1) begin
      if (apb.pwdata[2]) rx_ovr_d = 1'b0;
      if (apb.pwdata[3]) tx_ovr_d = 1'b0;
    end
  end

  `FF(rx_byte,   rx_data_q, clk, rx_valid, rst_n, 8'd0)
  `FF(rx_full_d, rx_full_q, clk, 1'b1, rst_n, 1'b0)
  `FF(rx_ovr_d,  rx_ovr_q,  clk, 1'b1, rst_n, 1'b0)
  `FF(tx_ovr_d,  tx_ovr_q,  clk, 1'b1, rst_n, 1'b0)
  `FF(apb.pwdata[15:0], div_q, clk, wr && reg_idx == 2'd2, rst_n, 16'(CLKS_PER_BIT))

  always_comb begin
    case (reg_idx)
      2'd0:    apb.prdata = {24'd0, rx_data_q};
      2'd1:    apb.prdata = {28'd0, tx_ovr_q, rx_ovr_q, rx_full_q, !tx_ready};
      2'd2:    apb.prdata = {16'd0, div_q};
      default: apb.prdata = '0;
    endcase
    apb.pready  = 1'b1;
    apb.pslverr = 1'b0;
    irq         = rx_full_q;
  end
endmodule
