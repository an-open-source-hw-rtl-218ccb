// tb_maxpool_accel: random signed int8 words, windows of several sizes.
// Each output word is compared lane by lane with a reference maximum over
// its window. Part 1 has random input gaps and output back-pressure. Part 2
// streams freely and checks one input word per cycle.
module tb_maxpool_accel;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic start, busy, iv, ir, ov, orr;
  logic [7:0] win;
  logic [31:0] no;
  logic [511:0] din, dout;
  int checks = 0, failures = 0, sent, outs;
  logic [511:0] q[$];
  bit free_run;

  maxpool_accel dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .win_i(win), .n_out_i(no), .busy_o(busy),
    .in_valid_i(iv), .in_ready_o(ir), .in_i(din), .out_valid_o(ov), .out_ready_i(orr), .out_o(dout));

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) begin
    // a word that was offered and not yet taken stays offered
    if (!(iv && !took)) iv = (sent < q.size()) && (free_run || $urandom % 4 != 0);
    if (sent < q.size()) din = q[sent];
    orr = free_run || ($urandom % 3 != 0);
  end
  bit took;
  always @(posedge clk) took = iv && ir;
  always @(posedge clk) if (rst_n) begin
    if (iv && ir) sent++;
    if (ov && orr) begin
      checks++;
      for (int l = 0; l < 64; l++) begin
        logic signed [7:0] m;
        m = $signed(q[outs*win][l*8 +: 8]);
        for (int e = 1; e < win; e++) if ($signed(q[outs*win+e][l*8 +: 8]) > m) m = $signed(q[outs*win+e][l*8 +: 8]);
        if ($signed(dout[l*8 +: 8]) != m) begin failures++; $display("window %0d lane %0d: %0d exp %0d", outs, l, $signed(dout[l*8 +: 8]), m); break; end
      end
      outs++;
    end
  end

  task automatic run(input int w, input int n, output int cycles);
    q.delete(); sent = 0; outs = 0;
    for (int i = 0; i < w * n; i++) begin
      logic [511:0] r;
      for (int j = 0; j < 16; j++) r[j*32 +: 32] = $urandom;
      q.push_back(r);
    end
    win = 8'(w); no = 32'(n);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 0;
    while (busy) begin @(negedge clk); cycles++; end
    checks++; if (outs != n) begin failures++; $display("%0d of %0d windows", outs, n); end
  endtask

  initial begin
    int c;
    start = 0; iv = 0; orr = 0; free_run = 0; win = 1; no = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    run(4, 6, c);
    run(9, 3, c);
    run(1, 4, c);
    free_run = 1;
    run(4, 16, c);
    $display("64 words in %0d cycles", c);
    checks++; if (c > 64 + 2) begin failures++; $display("rate too low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
