// tb_hw_barrier: three cores arrive at the barrier at different times. No
// core may pass before the last one arrives and all units are idle. All
// pass in the same cycle, the release counter counts barriers, and a read
// returns the arrival mask.
module tb_hw_barrier;
  import snax_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic [2:0] valid, ready, rvalid;
  csr_req_t [2:0] req;
  logic [2:0][31:0] rdata;
  logic [2:0] busy;
  logic [31:0] rel;
  int checks = 0, failures = 0, cyc = 0;
  int pass_cyc [3];

  hw_barrier #(.N_CORES(3), .N_UNITS(3)) dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(valid),
    .req_ready_o(ready), .req_i(req), .rsp_valid_o(rvalid), .rsp_ready_i(3'b111), .rsp_data_o(rdata),
    .unit_busy_i(busy), .releases_o(rel));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic arrive(input int c, input int delay);
    repeat (delay) @(negedge clk);
    valid[c] = 1; req[c] = '{addr: CSR_BARRIER, data: 0, write: 1};
    #1; while (!ready[c]) begin @(negedge clk); #1; end
    pass_cyc[c] = cyc;
    @(posedge clk); #1; valid[c] = 0;
  endtask

  // no barrier write may complete while any unit is busy
  always @(posedge clk) if (rst_n && busy != 0) begin
    for (int c = 0; c < 3; c++) if (valid[c] && ready[c] && req[c].write) begin
      failures++; $display("core %0d released while a unit is busy", c);
    end
  end

  initial begin
    valid = 0; req = '0; busy = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      int last;
      last = 3 + round * 4;
      busy = (round == 1) ? 3'b010 : 3'b000;   // in round 1 a unit stays busy for a while
      fork
        arrive(0, 1);
        arrive(1, last);
        arrive(2, 2);
        begin
          repeat (2) @(negedge clk);
          #2; checks++; if ((ready & valid) != 0) begin failures++; $display("released early"); end
          if (round == 1) begin repeat (last + 5) @(negedge clk); #2;
            checks++; if ((ready & valid) != 0) begin failures++; $display("released while a unit is busy"); end
            @(posedge clk); #1; busy = 0; end
        end
      join
      checks++; if (pass_cyc[0] != pass_cyc[1] || pass_cyc[1] != pass_cyc[2]) begin failures++; $display("not simultaneous"); end
    end
    @(negedge clk);
    checks++; if (rel != 3) begin failures++; $display("releases %0d", rel); end
    // read: arrival mask with core 0 waiting
    valid[0] = 1; req[0] = '{addr: CSR_BARRIER, data: 0, write: 1};
    valid[1] = 1; req[1] = '{addr: CSR_BARRIER, data: 0, write: 0};
    @(posedge clk); #1; valid[1] = 0;
    checks++; if (!rvalid[1] || rdata[1][2:0] != 3'b001) begin failures++; $display("mask %b", rdata[1][2:0]); end
    valid[0] = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
