// tb_streamer_agu: random loop bounds and strides in three of the six loops,
// random back-pressure. The address sequence is compared with a nested-loop
// model, and the number of addresses and the end of busy_o are checked.
// With ready held high, one address per cycle.
module tb_streamer_agu;
  import snax_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic start, valid, ready, busy;
  agu_cfg_t cfg;
  tcdm_addr_t addr;
  int checks = 0, failures = 0;
  tcdm_addr_t exp_q[$];

  streamer_agu dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .cfg_i(cfg), .valid_o(valid),
    .ready_i(ready), .addr_o(addr), .busy_o(busy));

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    start = 0; ready = 0; cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int n, cycles;
      cfg = '0;
      cfg.base = TCDM_AW'($urandom % 4096) & ~TCDM_AW'(7);
      for (int d = 0; d < 3; d++) begin
        cfg.bound[d]  = 16'($urandom % 5);          // 0 counts as 1
        cfg.stride[d] = TCDM_AW'(($urandom % 64) * 8);
      end
      cfg.bound[5] = (t % 4 == 0) ? 16'd2 : 16'd0;  // outermost loop used sometimes
      cfg.stride[5] = 17'h400;
      exp_q.delete();
      for (int i5 = 0; i5 < ((cfg.bound[5] == 0) ? 1 : cfg.bound[5]); i5++)
        for (int i2 = 0; i2 < ((cfg.bound[2] == 0) ? 1 : cfg.bound[2]); i2++)
          for (int i1 = 0; i1 < ((cfg.bound[1] == 0) ? 1 : cfg.bound[1]); i1++)
            for (int i0 = 0; i0 < ((cfg.bound[0] == 0) ? 1 : cfg.bound[0]); i0++)
              exp_q.push_back(cfg.base + TCDM_AW'(i0 * cfg.stride[0] + i1 * cfg.stride[1] + i2 * cfg.stride[2] + i5 * cfg.stride[5]));
      n = exp_q.size();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cycles = 0;
      while (busy) begin
        ready = (t % 2 == 0) ? 1'b1 : 1'($urandom % 2);
        #1;
        if (valid && ready) begin
          checks++;
          if (exp_q.size() == 0 || addr !== exp_q[0]) begin failures++; $display("addr %h exp %h", addr, exp_q[0]); end
          void'(exp_q.pop_front());
        end
        @(negedge clk); cycles++;
      end
      checks++; if (exp_q.size() != 0) begin failures++; $display("%0d addresses missing", exp_q.size()); end
      if (t % 2 == 0) begin checks++; if (cycles != n) begin failures++; $display("rate: %0d cycles for %0d", cycles, n); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
