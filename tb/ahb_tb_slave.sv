// ahb_tb_slave - testbench AHB-Lite slave: a 64-word memory with wait states.
//
// Every active transfer gets WAIT wait states. Reads return the stored word
// with the top byte replaced by TAG, so a test can tell which slave answered.
// Addresses whose bits [31:28] equal 4'hE get the two-cycle ERROR response.
// Counts accepted transfers in n_xfer. Memory is cleared at start.
//
// Test infrastructure only; wait states, tags and the error window are this
// testbench's own choices.
module ahb_tb_slave #(
  parameter int          WAIT = 0,
  parameter logic [7:0]  TAG  = 8'h00
) (
  input logic  clk,
  input logic  rst_n,
  ahb_if.slave ahb
);
  logic [31:0] mem [64];
  logic        dp, dp_wr, dp_err;
  logic [5:0]  dp_a;
  int          wcnt;
  int          n_xfer = 0;
  logic        err2;

  initial for (int i = 0; i < 64; i++) mem[i] = '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dp <= 1'b0; dp_wr <= 1'b0; dp_err <= 1'b0; dp_a <= '0; wcnt <= 0; err2 <= 1'b0;
    end else begin
      err2 <= 1'b0;
      if (dp && (wcnt > 0)) wcnt <= wcnt - 1;
      else if (dp && dp_err && !err2) begin
        err2 <= 1'b1;
      end
      if (ahb.hready) begin
        if (dp && dp_wr && !dp_err) mem[dp_a] <= ahb.hwdata;
        dp     <= ahb.hsel && ahb.htrans[1];
        dp_wr  <= ahb.hwrite;
        dp_a   <= ahb.haddr[7:2];
        dp_err <= (ahb.haddr[31:28] == 4'hE);
        wcnt   <= WAIT;
        err2   <= 1'b0;
        if (ahb.hsel && ahb.htrans[1]) n_xfer <= n_xfer + 1;
      end
    end
  end

  always_comb begin
    ahb.hrdata    = {TAG, mem[dp_a][23:0]};
    if (!dp)                 begin ahb.hreadyout = 1'b1; ahb.hresp = 1'b0; end
    else if (wcnt > 0)       begin ahb.hreadyout = 1'b0; ahb.hresp = 1'b0; end
    else if (dp_err)         begin ahb.hreadyout = err2; ahb.hresp = 1'b1; end
    else                     begin ahb.hreadyout = 1'b1; ahb.hresp = 1'b0; end
  end
endmodule
