// uart_host - UART bus master: a text command line onto the AHB bus.
//
// An external PC, through a USB-UART cable and any terminal program or
// serial library, types one command per line:
//   R <addr>          read the 32-bit word at hex address <addr>
//   W <addr> <data>   write hex <data> to the word at hex address <addr>
// Letters may be either case; numbers are hex with an optional 0x prefix;
// fields are separated by spaces or tabs; CR or LF ends the line. Each
// command becomes one single AHB-Lite word transfer (HSIZE=word, HBURST=
// SINGLE, address bits [1:0] forced to 0), needing no CPU. The reply is:
//   read  -> eight hex digits (upper case), CR, LF
//   write -> "OK", CR, LF
//   bus ERROR response -> "ERR", CR, LF
//   malformed line or unknown command letter -> "?", CR, LF
// Blank lines and leading spaces are ignored.
// Characters are not echoed (terminal local echo can be used), and
// characters arriving while a command executes or its reply is sent are
// discarded, so the host waits for the reply before the next command.
// Serial format 8N1 at CLK / CLKS_PER_BIT baud (default 115200 baud from a
// 100 MHz HCLK).
//
// Paper vs. this design: a UART bus master that turns simple text commands
// such as "R 0x70000000" from a PC into bus transfers, with no CPU involved,
// follows the paper. The exact command grammar, the replies, the error
// handling and the baud rate are this design's choices.
`include "RTL.svh"
module uart_host
  import chipkit_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic clk,
  input  logic rst_n,
  input  logic uart_rx,
  output logic uart_tx,
  ahb_if.master ahb
);
  typedef enum logic [2:0] {
    H_IDLE,     // waiting for a command letter
    H_ARG,      // collecting hex fields
    H_SKIP,     // bad character seen: discard to end of line
    H_ADDR,     // AHB address phase
    H_DATA,     // AHB data phase
    H_RESP      // sending the reply
  } host_state_e;

  typedef enum logic [1:0] {R_DATA, R_OK, R_ERR, R_SYNTAX} resp_e;

  localparam logic [15:0] CPB = 16'(CLKS_PER_BIT);

  host_state_e state_q, state_d;
  resp_e       resp_q, resp_d;
  logic        is_wr_q, is_wr_d;
  logic        field_q, field_d;          // 0: address, 1: data
  logic        got_q, got_d;              // a digit seen in this field
  logic [31:0] acc_q, acc_d;
  logic [31:0] addr_q, addr_d;
  logic [31:0] data_q, data_d;
  logic [3:0]  idx_q, idx_d;              // reply character index

  logic [7:0]  rx_data;
  logic        rx_valid;
  logic        tx_ready, tx_valid;
  logic [7:0]  tx_char;
  logic        is_hex, is_sp, is_eol;
  logic [3:0]  nib;

  uart_rx u_rx (.clk, .rst_n, .clks_per_bit(CPB), .rx(uart_rx), .data(rx_data), .valid(rx_valid));
  uart_tx u_tx (.clk, .rst_n, .clks_per_bit(CPB), .data(tx_char), .valid(tx_valid),
                .ready(tx_ready), .tx(uart_tx));

  // ASCII hex digit of a nibble, upper case
  function automatic logic [7:0] hex_char(input logic [3:0] n);
    return (n < 4'd10) ? (8'h30 + 8'(n)) : (8'h37 + 8'(n));
  endfunction

  // character idx of a reply, and reply length
  function automatic logic [7:0] resp_char(input resp_e r, input logic [3:0] i,
                                           input logic [31:0] d);
    logic [7:0] c;
    case (r)
      R_DATA:  c = (i < 4'd8) ? hex_char(d[4*(7-i) +: 4]) : (i == 4'd8 ? 8'h0D : 8'h0A);
      R_OK:    c = (i == 4'd0) ? "O" : (i == 4'd1) ? "K" : (i == 4'd2) ? 8'h0D : 8'h0A;
      R_ERR:   c = (i == 4'd0) ? "E" : (i < 4'd3) ? "R" : (i == 4'd3) ? 8'h0D : 8'h0A;
      default: c = (i == 4'd0) ? "?" : (i == 4'd1) ? 8'h0D : 8'h0A;
    endcase
    return c;
  endfunction

  function automatic logic [3:0] resp_len(input resp_e r);
    case (r)
      R_DATA:  return 4'd10;
      R_OK:    return 4'd4;
      R_ERR:   return 4'd5;
      default: return 4'd3;
    endcase
  endfunction

  always_comb begin
    is_eol = (rx_data == 8'h0D) || (rx_data == 8'h0A);
    is_sp  = (rx_data == 8'h20) || (rx_data == 8'h09);
    is_hex = 1'b1;
    nib    = '0;
    if (rx_data >= "0" && rx_data <= "9")      nib = 4'(rx_data - 8'h30);
    else if (rx_data >= "A" && rx_data <= "F") nib = 4'(rx_data - 8'h37);
    else if (rx_data >= "a" && rx_data <= "f") nib = 4'(rx_data - 8'h57);
    else                                        is_hex = 1'b0;
  end

  always_comb begin
    state_d = state_q;
    resp_d  = resp_q;
    is_wr_d = is_wr_q;
    field_d = field_q;
    got_d   = got_q;
    acc_d   = acc_q;
    addr_d  = addr_q;
    data_d  = data_q;
    idx_d   = idx_q;
    case (state_q)
      H_IDLE: if (rx_valid) begin
        if (rx_data == "R" || rx_data == "r" || rx_data == "W" || rx_data == "w") begin
          state_d = H_ARG;
          is_wr_d = (rx_data == "W" || rx_data == "w");
          field_d = 1'b0;
          got_d   = 1'b0;
          acc_d   = '0;
        end else if (!is_sp && !is_eol) begin
          state_d = H_SKIP;                     // unknown command letter
        end
      end
      H_ARG: if (rx_valid) begin
        if (is_hex) begin
          acc_d = {acc_q[27:0], nib};
          got_d = 1'b1;
        end else if (rx_data == "x" || rx_data == "X") begin
          // "0x" prefix: only valid right after a single leading zero
          if (got_q && acc_q == 32'd0) acc_d = '0;
          else                          state_d = H_SKIP;
        end else if (is_sp) begin
          if (got_q && is_wr_q && !field_q) begin
            addr_d  = acc_q;
            field_d = 1'b1;
            got_d   = 1'b0;
            acc_d   = '0;
          end
        end else if (is_eol) begin
          if (got_q && (!is_wr_q || field_q)) begin
            if (is_wr_q) data_d = acc_q;
            else         addr_d = acc_q;
            state_d = H_ADDR;
          end else begin
            state_d = H_RESP; resp_d = R_SYNTAX; idx_d = '0;
          end
        end else begin
          state_d = H_SKIP;
        end
      end
      H_SKIP: if (rx_valid && is_eol) begin
        state_d = H_RESP; resp_d = R_SYNTAX; idx_d = '0;
      end
      H_ADDR: if (ahb.hready) state_d = H_DATA;
      H_DATA: if (ahb.hready) begin
        state_d = H_RESP;
        idx_d   = '0;
        if (ahb.hresp == HRESP_ERROR) resp_d = R_ERR;
        else if (is_wr_q)             resp_d = R_OK;
        else begin
          resp_d = R_DATA;
          data_d = ahb.hrdata;
        end
      end
      H_RESP: if (tx_ready) begin
        idx_d = idx_q + 4'd1;
        if (idx_q == resp_len(resp_q) - 4'd1) state_d = H_IDLE;
      end
      default: state_d = H_IDLE;
    endcase
  end

  `FF(state_d, state_q, clk, 1'b1, rst_n, H_IDLE)
  `FF(resp_d,  resp_q,  clk, 1'b1, rst_n, R_OK)
  `FF(is_wr_d, is_wr_q, clk, 1'b1, rst_n, 1'b0)
  `FF(field_d, field_q, clk, 1'b1, rst_n, 1'b0)
  `FF(got_d,   got_q,   clk, 1'b1, rst_n, 1'b0)
  `FF(acc_d,   acc_q,   clk, 1'b1, rst_n, '0)
  `FF(addr_d,  addr_q,  clk, 1'b1, rst_n, '0)
  `FF(data_d,  data_q,  clk, 1'b1, rst_n, '0)
  `FF(idx_d,   idx_q,   clk, 1'b1, rst_n, '0)

  always_comb begin
    tx_valid      = (state_q == H_RESP);
    tx_char       = resp_char(resp_q, idx_q, data_q);
    ahb.haddr     = {addr_q[31:2], 2'b00};
    ahb.htrans    = (state_q == H_ADDR) ? HTRANS_NONSEQ : HTRANS_IDLE;
    ahb.hwrite    = is_wr_q;
    ahb.hsize     = HSIZE_WORD;
    ahb.hburst    = 3'b000;        // SINGLE
    ahb.hprot     = 4'b0011;       // data access, privileged
    ahb.hmastlock = 1'b0;
    ahb.hwdata    = data_q;
  end
endmodule
