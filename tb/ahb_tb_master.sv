// ahb_tb_master - testbench AHB-Lite master that runs a queue of transfers.
//
// push() queues single transfers (with an optional number of IDLE cycles
// before each); run() issues them back to back, pipelined as AHB allows
// (address phase of one transfer during the data phase of the previous),
// holding a transfer while HREADY is low. For every transfer it records the
// read data, the response and the cycle its data phase completed, so a test
// can check both values and latency. Signals change on the falling clock
// edge and are sampled 1 time unit later, which keeps the driver free of
// races with the design's rising-edge flops.
//
// Test infrastructure only: nothing here is taken from the paper beyond the
// use of AHB-Lite.
module ahb_tb_master (
  input logic   clk,
  ahb_if.master ahb
);
  typedef struct {
    logic [31:0] addr;
    logic        write;
    logic [2:0]  size;
    logic [31:0] wdata;
    int          idle;
  } txn_t;

  txn_t        q[$];
  logic [31:0] r_data[$];
  logic        r_resp[$];
  int          r_acc[$];     // cycle the address phase was accepted
  int          r_done[$];    // cycle the data phase completed
  int          cycle = 0;
  int          held  = 0;    // cycles an address phase was held (HREADY low)

  initial begin
    ahb.haddr = '0; ahb.htrans = 2'b00; ahb.hwrite = 1'b0; ahb.hsize = 3'b010;
    ahb.hburst = 3'b000; ahb.hprot = 4'b0011; ahb.hmastlock = 1'b0; ahb.hwdata = '0;
  end

  always @(negedge clk) cycle++;

  task automatic push(input logic [31:0] addr, input logic write, input logic [31:0] wdata,
                      input logic [2:0] size = 3'b010, input int idle = 0);
    txn_t t;
    t.addr = addr; t.write = write; t.wdata = wdata; t.size = size; t.idle = idle;
    q.push_back(t);
  endtask

  task automatic run();
    int n, ap, dp, gap;
    bit ap_act;
    n  = q.size();
    ap = 0; dp = -1;
    gap = (n > 0) ? q[0].idle : 0;
    r_data.delete(); r_resp.delete(); r_acc.delete(); r_done.delete();
    for (int i = 0; i < n; i++) begin
      r_data.push_back('0); r_resp.push_back(1'b0); r_acc.push_back(0); r_done.push_back(0);
    end
    while (ap < n || dp >= 0) begin
      @(negedge clk);
      ap_act     = (ap < n) && (gap == 0);
      ahb.htrans = ap_act ? 2'b10 : 2'b00;
      if (ap < n) begin
        ahb.haddr  = q[ap].addr;
        ahb.hwrite = q[ap].write;
        ahb.hsize  = q[ap].size;
      end
      ahb.hwdata = (dp >= 0) ? q[dp].wdata : 32'h0;
      #1;
      if (ahb.hready) begin
        if (dp >= 0) begin
          r_data[dp] = ahb.hrdata;
          r_resp[dp] = ahb.hresp;
          r_done[dp] = cycle;
        end
        if (ap_act) begin
          r_acc[ap] = cycle;
          dp  = ap;
          ap++;
          gap = (ap < n) ? q[ap].idle : 0;
        end else begin
          dp = -1;
          if (gap > 0) gap--;
        end
      end else if (ap_act) begin
        held++;
      end
    end
    @(negedge clk);
    ahb.htrans = 2'b00;
    q.delete();
  endtask
endmodule
