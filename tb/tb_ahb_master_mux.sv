// tb_ahb_master_mux - self-checking test of the two-master AHB mux.
//
// Two testbench masters (CPU side and UART-host side) share one testbench
// slave with one wait state through the mux. Checked:
// - a master that runs transfers back to back keeps the bus: the other
//   master, requesting meanwhile, is held and gets its first transfer
//   accepted only after the owner's last one;
// - the held master loses nothing: every write of both masters lands and
//   every read returns the right word (each master owns half the memory);
// - both masters were held at least once (contention happened) and the
//   slave saw exactly the number of transfers issued;
// - when a master goes idle between transfers, the two interleave.
//
// The paper gives the two masters; the sharing rule checked here is this
// design's.
module tb_ahb_master_mux;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ahb_if m0 ();
  ahb_if m1 ();
  ahb_if sb ();
  logic  owner;
  ahb_master_mux dut (.clk, .rst_n, .m0(m0), .m1(m1), .s(sb), .owner);
  ahb_tb_master u_m0 (.clk, .ahb(m0));
  ahb_tb_master u_m1 (.clk, .ahb(m1));
  ahb_tb_slave #(.WAIT(1), .TAG(8'h00)) u_s (.clk, .rst_n, .ahb(sb));
  assign sb.hsel   = 1'b1;
  assign sb.hready = sb.hreadyout;

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: m0 bursts 8 writes; m1 requests 4 writes one cycle later
    for (int i = 0; i < 8; i++) u_m0.push(32'(i) << 2, 1'b1, 32'h0000_1000 + i);
    for (int i = 0; i < 4; i++) u_m1.push(32'(32 + i) << 2, 1'b1, 32'h0000_2000 + i);
    fork
      u_m0.run();
      begin @(negedge clk); u_m1.run(); end
    join
    chk("m1 waited for m0 burst", u_m1.r_acc[0] > u_m0.r_acc[7]);
    chk("m1 was held", u_m1.held > 0);
    for (int i = 0; i < 4; i++) chk("m1 write resp", u_m1.r_resp[i] == 1'b0);
    // phase 2: m1 bursts reads of its words; m0 requests reads meanwhile
    for (int i = 0; i < 4; i++) u_m1.push(32'(32 + i) << 2, 1'b0, '0);
    for (int i = 0; i < 8; i++) u_m0.push(32'(i) << 2, 1'b0, '0);
    fork
      u_m1.run();
      begin @(negedge clk); u_m0.run(); end
    join
    chk("m0 was held", u_m0.held > 0);
    chk("m0 waited for m1 burst", u_m0.r_acc[0] > u_m1.r_acc[3]);
    for (int i = 0; i < 4; i++)
      chk($sformatf("m1 read %0d = %h", i, u_m1.r_data[i]), u_m1.r_data[i] == 32'h2000 + i);
    for (int i = 0; i < 8; i++)
      chk($sformatf("m0 read %0d = %h", i, u_m0.r_data[i]), u_m0.r_data[i] == 32'h1000 + i);
    // phase 3: both masters with idle gaps, random words in their halves
    begin
      logic [31:0] d0 [8], d1 [8];
      for (int i = 0; i < 8; i++) begin
        d0[i] = {8'h00, 24'($urandom)}; d1[i] = {8'h00, 24'($urandom)};
        u_m0.push(32'(8 + i) << 2, 1'b1, d0[i], 3'b010, 1);
        u_m1.push(32'(40 + i) << 2, 1'b1, d1[i], 3'b010, 1);
      end
      for (int i = 0; i < 8; i++) begin
        u_m0.push(32'(8 + i) << 2, 1'b0, '0, 3'b010, 1);
        u_m1.push(32'(40 + i) << 2, 1'b0, '0, 3'b010, 1);
      end
      fork u_m0.run(); u_m1.run(); join
      for (int i = 0; i < 8; i++) begin
        chk($sformatf("m0 gap read %0d", i), u_m0.r_data[8 + i] == d0[i]);
        chk($sformatf("m1 gap read %0d", i), u_m1.r_data[8 + i] == d1[i]);
      end
    end
    chk($sformatf("slave transfer count %0d", u_s.n_xfer), u_s.n_xfer == 24 + 32);
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
