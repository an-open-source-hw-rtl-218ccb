// tb_streamer_reader: an 8-lane reader in front of a memory model that
// returns f(addr) = {addr, ~addr} one cycle after each grant. It grants each
// lane at random, to stand in for bank conflicts, and the accelerator side
// takes data at random. Every wide word is checked against the nested-loop
// model. A second run with all grants and ready high checks the
// one-word-per-cycle rate.
module tb_streamer_reader;
  import snax_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic start, busy, dvalid, dready;
  agu_cfg_t cfg;
  logic [L-1:0] qv, qr, rv;
  tcdm_req_t [L-1:0] q;
  logic [L-1:0][63:0] rd;
  logic [L*64-1:0] data;
  int checks = 0, failures = 0, stall_cycles = 0;
  bit full_speed;
  tcdm_addr_t exp_q[$];

  streamer_reader #(.LANES(L), .FIFO_DEPTH(4)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .cfg_i(cfg),
    .busy_o(busy), .tcdm_req_valid_o(qv), .tcdm_req_ready_i(qr), .tcdm_req_o(q), .tcdm_rsp_valid_i(rv),
    .tcdm_rsp_data_i(rd), .data_valid_o(dvalid), .data_ready_i(dready), .data_o(data));

  function automatic logic [63:0] f(input tcdm_addr_t a);
    return {32'(a), ~32'(a)};
  endfunction

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // memory model
  always @(negedge clk) begin
    for (int l = 0; l < L; l++) qr[l] = full_speed ? 1'b1 : 1'($urandom % 10 < 6);
    dready = full_speed ? 1'b1 : 1'($urandom % 4 != 0);
  end
  always @(posedge clk) begin
    for (int l = 0; l < L; l++) begin
      rv[l] <= qv[l] && qr[l];
      rd[l] <= f(q[l].addr);
      if (qv[l] && !qr[l]) stall_cycles++;
    end
  end
  // output checker
  always @(posedge clk) if (rst_n && dvalid && dready) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("extra word"); end
    else begin
      for (int l = 0; l < L; l++)
        if (data[l*64 +: 64] !== f(exp_q[0] + TCDM_AW'(8*l))) begin failures++; $display("lane %0d of %h wrong", l, exp_q[0]); break; end
      void'(exp_q.pop_front());
    end
  end

  task automatic run(input int b0, input int s0, input int b1, input int s1, output int cycles);
    cfg = '0; cfg.base = 17'h1000; cfg.bound[0] = 16'(b0); cfg.stride[0] = 17'(s0);
    cfg.bound[1] = 16'(b1); cfg.stride[1] = 17'(s1);
    for (int i1 = 0; i1 < b1; i1++) for (int i0 = 0; i0 < b0; i0++)
      exp_q.push_back(cfg.base + 17'(i0 * s0 + i1 * s1));
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d words missing", exp_q.size()); end
  endtask

  initial begin
    int c;
    start = 0; cfg = '0; full_speed = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(6, 64, 5, 1024, c);
    run(3, 8, 7, 200, c);
    checks++; if (stall_cycles == 0) begin failures++; $display("no stalls exercised"); end
    full_speed = 1;
    run(16, 64, 4, 4096, c);
    $display("64 words in %0d cycles", c);
    checks++; if (c > 64 + 4) begin failures++; $display("rate too low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
