// tb_streamer_writer: an 8-lane writer fed by a random producer, with lanes
// granted at random. Every 64-bit write is recorded and compared with the
// nested-loop model after the stream ends. A run with all grants checks one
// wide word per cycle.
module tb_streamer_writer;
  import snax_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic start, busy, dvalid, dready;
  agu_cfg_t cfg;
  logic [L-1:0] qv, qr;
  tcdm_req_t [L-1:0] q;
  logic [L*64-1:0] data;
  int checks = 0, failures = 0, nwords = 0, writes = 0;
  bit full_speed;
  logic [63:0] mem [tcdm_addr_t];
  logic [63:0] exp_mem [tcdm_addr_t];

  streamer_writer #(.LANES(L), .FIFO_DEPTH(4)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .cfg_i(cfg),
    .busy_o(busy), .data_valid_i(dvalid), .data_ready_o(dready), .data_i(data),
    .tcdm_req_valid_o(qv), .tcdm_req_ready_i(qr), .tcdm_req_o(q));

  function automatic logic [L*64-1:0] word(input int n);
    logic [L*64-1:0] w;
    for (int l = 0; l < L; l++) w[l*64 +: 64] = {32'(n), 32'(l * 1000 + 7)};
    return w;
  endfunction

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) begin
    for (int l = 0; l < L; l++) qr[l] = full_speed ? 1'b1 : 1'($urandom % 10 < 6);
  end
  always @(posedge clk) begin
    for (int l = 0; l < L; l++) if (qv[l] && qr[l]) begin
      writes++;
      if (!q[l].we || q[l].strb != 8'hFF) begin failures++; $display("not a full write"); end
      mem[q[l].addr] = q[l].data;
    end
    if (dvalid && dready) nwords++;
  end
  // producer
  always @(negedge clk) begin
    if (!(dvalid && !dready)) dvalid = full_speed ? (nwords < 1000) : 1'($urandom % 3 != 0);
    data = word(nwords);
  end

  task automatic run(input int b0, input int s0, input int b1, input int s1, output int cycles);
    int n;
    cfg = '0; cfg.base = 17'h2000; cfg.bound[0] = 16'(b0); cfg.stride[0] = 17'(s0);
    cfg.bound[1] = 16'(b1); cfg.stride[1] = 17'(s1);
    mem.delete(); exp_mem.delete();
    n = 0;
    for (int i1 = 0; i1 < b1; i1++) for (int i0 = 0; i0 < b0; i0++) begin
      for (int l = 0; l < L; l++) exp_mem[cfg.base + 17'(i0 * s0 + i1 * s1 + 8*l)] = {32'(nwords + n), 32'(l * 1000 + 7)};
      n++;
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
    checks++; if (mem.size() != exp_mem.size()) begin failures++; $display("%0d locations written, %0d expected", mem.size(), exp_mem.size()); end
    foreach (exp_mem[a]) begin
      checks++; if (!mem.exists(a) || mem[a] !== exp_mem[a]) begin failures++; $display("addr %h wrong", a); end
    end
  endtask

  initial begin
    int c;
    start = 0; cfg = '0; full_speed = 0; dvalid = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(5, 64, 6, 1024, c);
    run(4, 64, 3, 512, c);
    full_speed = 1;
    run(16, 64, 4, 2048, c);
    $display("64 words in %0d cycles", c);
    checks++; if (c > 64 + 4) begin failures++; $display("rate too low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
