// tb_apb_interconnect - self-checking test of the APB decoder and read mux.
//
// An APB testbench master drives five testbench slaves through the
// interconnect, each tagging its read data with its number and slave 2
// adding wait states. Checked: writes reach only the addressed slave (read
// back through every slot), tags, PREADY wait states pass through, and
// unmapped slots (PADDR[15:12] >= 5) answer at once with PSLVERR.
//
// The paper names the APB interconnect; slot size and the empty-slot error
// are this design's.
module tb_apb_interconnect;
  import chipkit_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  apb_if mb ();
  apb_if sb [APB_NSLV] ();
  apb_interconnect dut (.m(mb), .s(sb));
  apb_tb_master u_m (.clk, .apb(mb));
  for (genvar i = 0; i < APB_NSLV; i++) begin : g_s
    apb_tb_slave #(.WAIT(i == 2 ? 3 : 0), .TAG(8'(8'hA0 + i))) u_s (.clk, .rst_n, .apb(sb[i]));
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [31:0] rd; logic err; int w0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < APB_NSLV; i++) u_m.write(32'h5000_0000 | (32'(i) << 12) | 32'h8, 32'h0012_3400 | i);
    for (int i = 0; i < APB_NSLV; i++) begin
      u_m.xfer(32'h5000_0000 | (32'(i) << 12) | 32'h8, 1'b0, '0, rd, err);
      chk($sformatf("slot %0d data %h", i, rd), rd == {8'(8'hA0 + i), 24'h12_3400 | 24'(i)} && !err);
      u_m.xfer(32'h5000_0000 | (32'(i) << 12) | 32'h4, 1'b0, '0, rd, err);
      chk($sformatf("slot %0d other word untouched", i), rd == {8'(8'hA0 + i), 24'h0});
    end
    w0 = u_m.n_wait;
    u_m.xfer(32'h5000_2000, 1'b0, '0, rd, err);
    chk("slot 2 wait states", u_m.n_wait - w0 == 3);
    for (int i = APB_NSLV; i < 16; i++) begin
      w0 = u_m.n_wait;
      u_m.xfer(32'h5000_0000 | (32'(i) << 12), 1'b0, '0, rd, err);
      chk($sformatf("slot %0d unmapped error", i), err && (u_m.n_wait == w0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
