// apb_tb_master - testbench APB master with write() and read() tasks.
//
// Each access is a SETUP cycle then ACCESS cycles until PREADY. Signals
// change on the falling clock edge. read() returns PRDATA and write()/read()
// report PSLVERR; n_wait counts ACCESS cycles with PREADY low.
//
// Test infrastructure only (AMBA 3 APB), not taken from the paper.
module apb_tb_master (
  input logic   clk,
  apb_if.master apb
);
  int n_wait = 0;
  initial begin
    apb.paddr = '0; apb.psel = 1'b0; apb.penable = 1'b0; apb.pwrite = 1'b0; apb.pwdata = '0;
  end

  task automatic xfer(input logic [31:0] addr, input logic wr, input logic [31:0] wdata,
                      output logic [31:0] rdata, output logic err);
    @(negedge clk);
    apb.paddr = addr; apb.pwrite = wr; apb.pwdata = wdata; apb.psel = 1'b1; apb.penable = 1'b0;
    @(negedge clk);
    apb.penable = 1'b1;
    #1;
    while (!apb.pready) begin
      n_wait++;
      @(negedge clk); #1;
    end
    rdata = apb.prdata;
    err   = apb.pslverr;
    @(negedge clk);
    apb.psel = 1'b0; apb.penable = 1'b0;
  endtask

  task automatic write(input logic [31:0] addr, input logic [31:0] wdata);
    logic [31:0] d; logic e;
    xfer(addr, 1'b1, wdata, d, e);
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] rdata);
    logic e;
    xfer(addr, 1'b0, '0, rdata, e);
  endtask
endmodule
