// tb_csr_buffer: double buffering and the CSR handshake.
// 1. Write a set, START: start_o is high in the second cycle after START with cfg_o
//    equal to the written set.
// 2. While the (testbench-modelled) unit is busy, preload a second set and
//    START: accepted at once, cfg_o unchanged, STATUS shows pending. A
//    further write stalls until the set is taken. The second task launches
//    the cycle after busy drops.
// 3. A single-buffered instance stalls writes while busy.
module tb_csr_buffer;
  import snax_pkg::*;
  localparam logic [11:0] BASE = 12'h100;
  localparam int NR = 4;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic [1:0] valid, ready, rvalid, rready;
  csr_req_t [1:0] req;
  logic [1:0][31:0] rdata;
  logic [1:0][NR-1:0][31:0] cfg;
  logic [1:0] start, busy;
  int checks = 0, failures = 0, cyc = 0, busy_left[2];

  for (genvar i = 0; i < 2; i++) begin : g_dut
    csr_buffer #(.BASE(BASE), .N_REGS(NR), .DOUBLE_BUFFER(i == 0)) dut (
      .clk_i(clk), .rst_ni(rst_n), .req_valid_i(valid[i]), .req_ready_o(ready[i]), .req_i(req[i]),
      .rsp_valid_o(rvalid[i]), .rsp_ready_i(rready[i]), .rsp_data_o(rdata[i]),
      .cfg_o(cfg[i]), .start_o(start[i]), .busy_i(busy[i]));
  end

  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // unit model: busy for 10 cycles after each start
  always @(posedge clk) begin
    cyc++;
    for (int i = 0; i < 2; i++) begin
      if (start[i]) busy_left[i] = 10;
      else if (busy_left[i] > 0) busy_left[i]--;
      busy[i] <= (busy_left[i] > 0);
    end
  end

  task automatic check(input bit cond, input string msg);
    checks++; if (!cond) begin failures++; $display("FAIL: %s (cycle %0d)", msg, cyc); end
  endtask

  // returns the number of cycles the write waited for ready
  task automatic wr(input int i, input logic [11:0] a, input logic [31:0] d, output int waited);
    waited = 0;
    @(negedge clk); valid[i] = 1; req[i] = '{addr: a, data: d, write: 1};
    #1; while (!ready[i]) begin @(negedge clk); waited++; #1; end
    @(posedge clk); #1; valid[i] = 0;
  endtask

  task automatic rd(input int i, input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); valid[i] = 1; req[i] = '{addr: a, data: 0, write: 0};
    #1; while (!ready[i]) begin @(negedge clk); #1; end
    @(posedge clk); #1; valid[i] = 0;
    while (!rvalid[i]) begin @(posedge clk); #1; end
    d = rdata[i];
  endtask

  initial begin
    int w, t0;
    logic [31:0] d;
    valid = 0; rready = '1; req = '0; busy_left = '{0, 0}; busy = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < NR; r++) wr(0, BASE + 12'(r), 32'h1000 + r, w);
    rd(0, BASE + 2, d); check(d == 32'h1002, "read back shadow");
    wr(0, BASE + NR, 0, w);             // START
    t0 = cyc;
    @(posedge start[0]); #1;
    check(cyc - t0 == 1, $sformatf("start latency %0d", cyc - t0));
    check(cfg[0][3] == 32'h1003 && cfg[0][0] == 32'h1000, "active set loaded");
    // preload while busy
    @(negedge clk); @(negedge clk); check(busy[0], "unit busy");
    for (int r = 0; r < NR; r++) begin wr(0, BASE + 12'(r), 32'h2000 + r, w); check(w == 0, "preload write not stalled"); end
    wr(0, BASE + NR, 0, w); check(w == 0, "preload START accepted while busy");
    check(cfg[0][1] == 32'h1001, "active set unchanged while busy");
    rd(0, BASE + NR + 1, d); check(d[1:0] == 2'b11, $sformatf("status pending+busy %b", d[1:0]));
    // a write now must stall until the pending set launches
    wr(0, BASE, 32'h3000, w); check(w > 0, "write stalls while a set is pending");
    check(cfg[0][0] == 32'h2000 && cfg[0][2] == 32'h2002, "second set active after launch");
    // back-to-back launch: second start comes the cycle after busy drops
    wait (busy[0] == 1); @(negedge busy[0]); t0 = cyc;
    wr(0, BASE + NR, 0, w);
    @(posedge start[0]); #1; check(cyc - t0 <= 4, "relaunch");
    check(cfg[0][0] == 32'h3000, "third set active");
    wait (busy[0] == 1); wait (busy[0] == 0); @(negedge clk);
    rd(0, BASE + NR + 2, d); check(d == 30, $sformatf("perf counter %0d", d));
    rd(0, BASE + NR + 1, d); check(d[1:0] == 2'b00, "idle status");
    // single-buffered instance
    wr(1, BASE + 1, 32'hA, w); wr(1, BASE + NR, 0, w);
    @(posedge start[1]); @(negedge clk); check(cfg[1][1] == 32'hA, "single buffer cfg");
    wr(1, BASE + 1, 32'hB, w); check(w > 5, "single buffer write stalls while busy");
    check(cfg[1][1] == 32'hB, "single buffer write lands after busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
