// apb_tb_slave - testbench APB slave: 16 words, WAIT wait states, tagged reads.
//
// Every access gets WAIT cycles of PREADY low in the ACCESS phase. Reads
// return the stored word with the top byte replaced by TAG. Word offset 0xF
// (PADDR[5:2]==15) answers with PSLVERR.
//
// Test infrastructure only (AMBA 3 APB), not taken from the paper.
module apb_tb_slave #(
  parameter int         WAIT = 0,
  parameter logic [7:0] TAG  = 8'h00
) (
  input logic  clk,
  input logic  rst_n,
  apb_if.slave apb
);
  logic [31:0] mem [16];
  int          cnt;
  initial for (int i = 0; i < 16; i++) mem[i] = '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= 0;
    else if (apb.psel && apb.penable) begin
      if (cnt < WAIT) cnt <= cnt + 1;
      else begin
        cnt <= 0;
        if (apb.pwrite && apb.paddr[5:2] != 4'hF) mem[apb.paddr[5:2]] <= apb.pwdata;
      end
    end else cnt <= 0;
  end

  always_comb begin
    apb.pready  = (cnt >= WAIT);
    apb.prdata  = {TAG, mem[apb.paddr[5:2]][23:0]};
    apb.pslverr = apb.pready && (apb.paddr[5:2] == 4'hF);
  end
endmodule
