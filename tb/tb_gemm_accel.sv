// tb_gemm_accel: random signed int8 tiles. A task of N_OUT output tiles,
// each accumulated over K_TILES 8x8x8 steps, is compared with a reference
// matrix product computed here. Part 1 has random input gaps and output
// back-pressure. Part 2 has a free-running stream and checks one step per
// cycle: K_TILES*N_OUT steps in that many cycles, plus the output drain.
module tb_gemm_accel;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic start, busy, av, bv, abr, cv, cr;
  logic [15:0] kt;
  logic [31:0] no, macs;
  logic [511:0] a, b;
  logic [2047:0] c;
  int checks = 0, failures = 0;
  logic [511:0] aq[$], bq[$];
  bit free_run;

  gemm_accel dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .k_tiles_i(kt), .n_out_i(no), .busy_o(busy),
    .a_valid_i(av), .a_i(a), .b_valid_i(bv), .b_i(b), .ab_ready_o(abr), .c_valid_o(cv), .c_ready_i(cr),
    .c_o(c), .mac_cycles_o(macs));

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [511:0] rnd512();
    logic [511:0] r;
    for (int i = 0; i < 16; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  // reference: sum over the K_TILES steps of output tile t
  function automatic logic [2047:0] ref_c(input int t, input int ktiles);
    logic [2047:0] r;
    for (int m = 0; m < 8; m++) for (int n = 0; n < 8; n++) begin
      int s;
      s = 0;
      for (int kk = 0; kk < ktiles; kk++)
        for (int k = 0; k < 8; k++)
          s += int'($signed(aq[t*ktiles+kk][(m*8+k)*8 +: 8])) * int'($signed(bq[t*ktiles+kk][(k*8+n)*8 +: 8]));
      r[(m*8+n)*32 +: 32] = s;
    end
    return r;
  endfunction

  int sent, outs;
  always @(negedge clk) begin
    // a pair that was offered and not yet taken stays offered
    if (!(av && !took)) av = (sent < aq.size()) && (free_run || $urandom % 4 != 0);
    bv = av;
    if (sent < aq.size()) begin a = aq[sent]; b = bq[sent]; end
    cr = free_run || ($urandom % 3 != 0);
  end
  bit took;
  always @(posedge clk) took = abr;
  always @(posedge clk) if (rst_n) begin
    if (abr) sent++;
    if (cv && cr) begin
      checks++;
      if (c !== ref_c(outs, int'(kt))) begin failures++; $display("tile %0d wrong", outs); end
      outs++;
    end
  end

  task automatic run(input int ktiles, input int nout, output int cycles);
    aq.delete(); bq.delete(); sent = 0; outs = 0;
    for (int i = 0; i < ktiles * nout; i++) begin aq.push_back(rnd512()); bq.push_back(rnd512()); end
    kt = 16'(ktiles); no = 32'(nout);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 0;
    while (busy) begin @(negedge clk); cycles++; end
    checks++; if (outs != nout) begin failures++; $display("%0d of %0d tiles", outs, nout); end
  endtask

  initial begin
    int cyc;
    logic [31:0] m0;
    start = 0; av = 0; bv = 0; cr = 0; free_run = 0; kt = 1; no = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    run(3, 4, cyc);
    run(1, 5, cyc);
    free_run = 1;
    m0 = macs;
    run(4, 8, cyc);
    $display("32 steps in %0d cycles", cyc);
    checks++; if (cyc > 32 + 2) begin failures++; $display("rate too low"); end
    checks++; if (macs - m0 != 32) begin failures++; $display("mac counter %0d", macs - m0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
