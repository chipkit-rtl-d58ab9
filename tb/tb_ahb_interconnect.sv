// tb_ahb_interconnect - self-checking test of the AHB address decoder/mux.
//
// One testbench master drives the interconnect; each of the five slave
// ports has a testbench slave that tags its read data with its own number
// and has its own number of wait states. For every region of the memory map
// the test writes, then reads back at the region's lowest and highest word
// and checks the tag (right slave), the data, and the data-phase length
// (wait states of that slave + 1). Addresses in unmapped holes must get the
// two-cycle ERROR from the default slave; transfers in the same pipeline
// around them must still complete normally.
//
// Checking every mapped region at both ends plus the unmapped holes follows
// the paper's advice to test the whole memory map, valid and unmapped; the
// map itself is this design's.
module tb_ahb_interconnect;
  import chipkit_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ahb_if mbus ();
  ahb_if sbus [AHB_NSLV] ();
  ahb_interconnect dut (.clk, .rst_n, .m(mbus), .s(sbus));
  ahb_tb_master u_m (.clk, .ahb(mbus));

  localparam int WAITS [AHB_NSLV] = '{0, 1, 0, 2, 3};
  for (genvar i = 0; i < AHB_NSLV; i++) begin : g_s
    ahb_tb_slave #(.WAIT(WAITS[i]), .TAG(8'(8'h10 + i))) u_s (.clk, .rst_n, .ahb(sbus[i]));
  end

  logic [31:0] exp_d[$];
  int          exp_lat[$];
  logic        exp_err[$], is_rd[$];

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic go();
    u_m.run();
    for (int i = 0; i < exp_d.size(); i++) begin
      chk($sformatf("resp %0d", i), u_m.r_resp[i] == exp_err[i]);
      chk($sformatf("latency %0d got %0d exp %0d", i, u_m.r_done[i] - u_m.r_acc[i], exp_lat[i]),
          (u_m.r_done[i] - u_m.r_acc[i]) == exp_lat[i]);
      if (is_rd[i] && !exp_err[i])
        chk($sformatf("data %0d got %h exp %h", i, u_m.r_data[i], exp_d[i]), u_m.r_data[i] == exp_d[i]);
    end
    exp_d.delete(); exp_lat.delete(); exp_err.delete(); is_rd.delete();
  endtask

  task automatic acc(input logic [31:0] a, input logic w, input logic [31:0] d,
                     input logic [31:0] e, input int lat, input logic err);
    u_m.push(a, w, d);
    exp_d.push_back(e); exp_lat.push_back(lat); exp_err.push_back(err); is_rd.push_back(!w);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < AHB_NSLV; i++) begin
      logic [31:0] lo, hi;
      lo = AHB_BASE[i];
      hi = AHB_BASE[i] + AHB_SIZE[i] - 32'd4;   // slave memory index = addr[7:2]
      acc(lo, 1'b1, 32'h00AB_0000 | i, '0, WAITS[i] + 1, 1'b0);
      acc(hi, 1'b1, 32'h00CD_0000 | i, '0, WAITS[i] + 1, 1'b0);
      acc(lo, 1'b0, '0, {8'(8'h10 + i), 24'hAB_0000 | 24'(i)}, WAITS[i] + 1, 1'b0);
      acc(hi, 1'b0, '0, {8'(8'h10 + i), 24'hCD_0000 | 24'(i)}, WAITS[i] + 1, 1'b0);
    end
    go();
    // unmapped holes: just past each region, and the top of the space
    acc(32'h0001_0000, 1'b0, '0, '0, 2, 1'b1);
    acc(32'h2000_0000, 1'b0, '0, {8'h11, 24'hAB_0001}, 2, 1'b0);
    acc(32'h2001_0000, 1'b1, 32'h1, '0, 2, 1'b1);
    acc(32'h4000_1000, 1'b0, '0, '0, 2, 1'b1);
    acc(32'h4000_0000, 1'b0, '0, {8'h12, 24'hAB_0002}, 1, 1'b0);
    acc(32'h5001_0000, 1'b0, '0, '0, 2, 1'b1);
    acc(32'h6000_0000, 1'b1, 32'h2, '0, 2, 1'b1);
    acc(32'h8000_0000, 1'b0, '0, '0, 2, 1'b1);
    acc(32'hFFFF_FFFC, 1'b0, '0, '0, 2, 1'b1);
    acc(32'h7FFF_FFFC, 1'b0, '0, {8'h14, 24'hCD_0004}, 4, 1'b0);
    go();
    // every slave saw exactly its own transfers
    chk("imem count",  g_s[0].u_s.n_xfer == 4);
    chk("dmem count",  g_s[1].u_s.n_xfer == 5);
    chk("gpio count",  g_s[2].u_s.n_xfer == 5);
    chk("apb count",   g_s[3].u_s.n_xfer == 4);
    chk("accel count", g_s[4].u_s.n_xfer == 5);
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
