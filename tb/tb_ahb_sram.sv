// tb_ahb_sram - self-checking test of the AHB SRAM interface at 64 KB.
//
// A reference array in the testbench mirrors every write. Checked:
// word writes then reads toggling every address bit (lowest and highest
// word, one word per address bit), byte and halfword writes merged into a
// word, a back-to-back random mix, and latency: a read right after a write
// takes two data-phase cycles (one wait state), any other transfer one.
//
// The paper gives the SRAM's AHB interface; the wait-state timing checked is
// this design's.
module tb_ahb_sram;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ahb_if bus ();
  ahb_sram dut (.clk, .rst_n, .ahb(bus));
  ahb_tb_master u_m (.clk, .ahb(bus));
  assign bus.hsel  = 1'b1;
  assign bus.hready = bus.hreadyout;

  logic [31:0] ref_mem [int];
  logic [31:0] exp_q[$];
  logic        isrd_q[$];
  int          lat_q[$];

  function automatic logic [31:0] ref_rd(int w);
    return ref_mem.exists(w) ? ref_mem[w] : 32'h0;
  endfunction

  task automatic wr(input logic [31:0] a, input logic [31:0] d, input logic [2:0] sz = 3'b010);
    int w; logic [3:0] st; logic [31:0] old;
    w = int'(a[15:2]);
    st = (sz == 3'b000) ? (4'b0001 << a[1:0]) : (sz == 3'b001) ? (a[1] ? 4'b1100 : 4'b0011) : 4'b1111;
    old = ref_rd(w);
    for (int b = 0; b < 4; b++) if (st[b]) old[8*b +: 8] = d[8*b +: 8];
    ref_mem[w] = old;
    u_m.push(a, 1'b1, d, sz);
    exp_q.push_back('0); isrd_q.push_back(1'b0);
  endtask

  task automatic rd(input logic [31:0] a);
    u_m.push(a, 1'b0, '0);
    exp_q.push_back(ref_rd(int'(a[15:2]))); isrd_q.push_back(1'b1);
  endtask

  task automatic go_check();
    u_m.run();
    for (int i = 0; i < exp_q.size(); i++) begin
      int lat;
      lat = u_m.r_done[i] - u_m.r_acc[i];
      if (isrd_q[i]) begin
        checks++;
        if (u_m.r_data[i] !== exp_q[i]) begin
          failures++;
          $display("FAIL read %0d: got %h exp %h", i, u_m.r_data[i], exp_q[i]);
        end
      end
      // expected data-phase length: 2 cycles for a read right after a write
      checks++;
      if (lat != ((isrd_q[i] && i > 0 && !isrd_q[i-1] && lat_q[i] == 0) ? 2 : 1)) begin
        failures++;
        $display("FAIL latency %0d: %0d cycles", i, lat);
      end
    end
    exp_q.delete(); isrd_q.delete(); lat_q.delete();
  endtask

  // remember whether each transfer had idle cycles before it
  task automatic gap(input int g); lat_q.push_back(g); endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // walking address bits, lowest and highest word
    wr(32'h0, 32'hA5A5_0000); gap(0);
    wr(32'hFFFC, 32'h5A5A_FFFF); gap(0);
    for (int b = 2; b < 16; b++) begin wr(32'h1 << b, 32'h1 << (b + 16) | b); gap(0); end
    rd(32'h0); gap(0);
    rd(32'hFFFC); gap(0);
    for (int b = 2; b < 16; b++) begin rd(32'h1 << b); gap(0); end
    go_check();
    // data bits: walking ones across the data word
    for (int b = 0; b < 32; b++) begin wr(32'h100 + 4*b, 32'h1 << b); gap(0); end
    for (int b = 0; b < 32; b++) begin rd(32'h100 + 4*b); gap(0); end
    go_check();
    // byte / halfword writes then a read right after (collision wait)
    wr(32'h200, 32'h1122_3344); gap(0);
    wr(32'h201, 32'h0000_AB00, 3'b000); gap(0);
    wr(32'h202, 32'hCDEF_0000, 3'b001); gap(0);
    rd(32'h200); gap(0);
    wr(32'h204, 32'hDEAD_BEEF); gap(0);
    rd(32'h204); gap(0);
    rd(32'h200); gap(0);
    go_check();
    // random back-to-back mix over 256 words, all written first (the SRAM
    // has no reset, so unwritten words are undefined)
    for (int i = 0; i < 256; i++) begin wr(32'(i) << 2, $urandom); gap(0); end
    go_check();
    for (int i = 0; i < 400; i++) begin
      logic [31:0] a;
      a = {16'h0, 16'($urandom_range(0, 255)) << 2};
      if ($urandom_range(0, 1) != 0) wr(a, $urandom); else rd(a);
      gap(0);
    end
    go_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
