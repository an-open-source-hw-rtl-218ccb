// tb_tiled_matmul: one tile of the tiled matrix multiplication used for the
// roofline sweep, on the full-size cluster: C (32x32 int32) = A (32x32 int8)
// * B (32x32 int8). The DMA brings A and B in (2 kB), the GeMM computes the
// 64 8x8x8 steps as one task, and the DMA writes C (4 kB) back out, where it
// is checked against a reference.
// Layout: A tile (mt, kk) at SA + 256*(4*mt + kk), B tile (nt, kk) at
// SB + 64 + 256*(4*nt + kk). A tiles therefore sit in banks 0-7 and B tiles
// in banks 8-15, so the two readers never meet in a bank; C tile (mt, nt)
// takes 256 bytes at SC + 256*(4*mt + nt). The DMA scatters the contiguous
// external tiles into that layout with its destination stride.
// Measured and checked: GeMM utilization (steps per busy cycle, at least
// 75%: each 2048-bit C write takes every bank for a cycle) and DMA beats per
// busy cycle (at least 0.8 with no bus stalls).
module tb_tiled_matmul;
  import snax_pkg::*;
  localparam int SA = 'h0000, SB = 'h1000, SC = 'h4000;
  localparam int E_A = 0, E_B = 64, E_C = 128;   // external beats
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic     [2:0]       cv, cr, crv;
  csr_req_t [2:0]       cq;
  logic     [2:0][31:0] crd;
  logic      [2:0]       tv, tr, trv;
  tcdm_req_t [2:0]       tq;
  logic      [2:0][63:0] trd;
  logic ar_v, ar_r, r_v, r_r, r_l, aw_v, aw_r, w_v, w_r, w_l, b_v, b_r;
  logic [31:0] ar_a, aw_a;
  logic [7:0] ar_l, aw_l;
  logic [511:0] r_d, w_d;
  logic [63:0] w_s;
  logic [2:0] ubusy;
  logic [31:0] releases, macs;
  int checks = 0, failures = 0;
  logic signed [7:0] A [32][32];
  logic signed [7:0] B [32][32];

  snax_cluster dut (.clk_i(clk), .rst_ni(rst_n),
    .core_csr_req_valid_i(cv), .core_csr_req_ready_o(cr), .core_csr_req_i(cq),
    .core_csr_rsp_valid_o(crv), .core_csr_rsp_ready_i(3'b111), .core_csr_rsp_data_o(crd),
    .core_tcdm_req_valid_i(tv), .core_tcdm_req_ready_o(tr), .core_tcdm_req_i(tq),
    .core_tcdm_rsp_valid_o(trv), .core_tcdm_rsp_data_o(trd),
    .axi_ar_valid_o(ar_v), .axi_ar_ready_i(ar_r), .axi_ar_addr_o(ar_a), .axi_ar_len_o(ar_l),
    .axi_r_valid_i(r_v), .axi_r_ready_o(r_r), .axi_r_data_i(r_d), .axi_r_last_i(r_l),
    .axi_aw_valid_o(aw_v), .axi_aw_ready_i(aw_r), .axi_aw_addr_o(aw_a), .axi_aw_len_o(aw_l),
    .axi_w_valid_o(w_v), .axi_w_ready_i(w_r), .axi_w_data_o(w_d), .axi_w_strb_o(w_s), .axi_w_last_o(w_l),
    .axi_b_valid_i(b_v), .axi_b_ready_o(b_r),
    .unit_busy_o(ubusy), .barrier_releases_o(releases), .gemm_mac_cycles_o(macs));
  axi_mem_model #(.BEATS(512)) ext (.clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(ar_v), .ar_ready_o(ar_r), .ar_addr_i(ar_a), .ar_len_i(ar_l),
    .r_valid_o(r_v), .r_ready_i(r_r), .r_data_o(r_d), .r_last_o(r_l),
    .aw_valid_i(aw_v), .aw_ready_o(aw_r), .aw_addr_i(aw_a), .aw_len_i(aw_l),
    .w_valid_i(w_v), .w_ready_o(w_r), .w_data_i(w_d), .w_strb_i(w_s), .w_last_i(w_l),
    .b_valid_o(b_v), .b_ready_i(b_r));

  always #5 clk = ~clk;
  initial begin #50000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic csr(input int c, input int addr, input logic w, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk); cv[c] = 1; cq[c] = '{addr: 12'(addr), data: d, write: w};
    #1; while (!cr[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1; cv[c] = 0;
    if (!w) begin while (!crv[c]) begin @(posedge clk); #1; end r = crd[c]; end
  endtask
  task automatic ld(input int c, input int a, output logic [63:0] d);
    @(negedge clk); tv[c] = 1; tq[c] = '{addr: TCDM_AW'(a), we: 0, strb: '0, data: '0};
    #1; while (!tr[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1; tv[c] = 0; d = trd[c];
  endtask
  task automatic st(input int c, input int a, input logic [63:0] d);
    @(negedge clk); tv[c] = 1; tq[c] = '{addr: TCDM_AW'(a), we: 1, strb: '1, data: d};
    #1; while (!tr[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1; tv[c] = 0;
  endtask
  task automatic wr_loops(input int c, input int reg0, input int base, input int b [6], input int s [6]);
    logic [31:0] r;
    csr(c, reg0, 1, base, r);
    for (int d = 0; d < 6; d++) begin csr(c, reg0 + 1 + d, 1, b[d], r); csr(c, reg0 + 7 + d, 1, s[d], r); end
  endtask
  task automatic wait_idle(input int c, input int status);
    logic [31:0] r;
    do csr(c, status, 0, 0, r); while (r[1:0] != 0);
  endtask
  task automatic dma_in(input int ebeat, input int dst, input int beats);
    logic [31:0] r;
    int D;
    D = CSR_DMA_BASE;
    csr(2, D + 0, 1, ebeat * 64, r); csr(2, D + 1, 1, dst, r); csr(2, D + 2, 1, beats, r);
    csr(2, D + 3, 1, 0, r); csr(2, D + 4, 1, 0, r); csr(2, D + 5, 1, 1, r); csr(2, D + 6, 1, 0, r);
    csr(2, D + 7, 1, 0, r);
    wait_idle(2, D + 8);
  endtask

  initial begin
    logic [31:0] r;
    int g, D, t0, busy_cyc, dcyc;
    cv = 0; cq = '0; tv = 0; tq = '0;
    for (int i = 0; i < 32; i++) for (int j = 0; j < 32; j++) begin A[i][j] = 8'($urandom); B[i][j] = 8'($urandom); end
    for (int i = 0; i < 512; i++) ext.mem[i] = '0;
    // external: A tiles (mt, kk) and B tiles (nt, kk), one beat each, in order
    for (int t = 0; t < 4; t++) for (int kk = 0; kk < 4; kk++) for (int u = 0; u < 8; u++) for (int k = 0; k < 8; k++) begin
      ext.mem[E_A + 4*t + kk][(u*8+k)*8 +: 8] = A[t*8+u][kk*8+k];   // byte m*8+k
      ext.mem[E_B + 4*t + kk][(k*8+u)*8 +: 8] = B[kk*8+k][t*8+u];   // byte k*8+n
    end
    repeat (3) @(posedge clk); rst_n = 1;
    D = CSR_DMA_BASE;
    for (int op = 0; op < 2; op++) begin
      csr(2, D + 8 + 1, 0, 0, r); t0 = r;
      csr(2, D + 0, 1, (op ? E_B : E_A) * 64, r); csr(2, D + 1, 1, op ? SB + 64 : SA, r);
      csr(2, D + 2, 1, 1, r); csr(2, D + 3, 1, 64, r); csr(2, D + 4, 1, 256, r);
      csr(2, D + 5, 1, 16, r); csr(2, D + 6, 1, 0, r); csr(2, D + 7, 1, 0, r);
      wait_idle(2, D + 8);
      csr(2, D + 9, 0, 0, r); dcyc = r - t0;
      $display("DMA in: 16 beats in %0d busy cycles", dcyc);
    end
    g = CSR_GEMM_BASE;
    // loops innermost first: kk, nt, mt
    wr_loops(1, g + 0,  SA,      '{4, 4, 4, 1, 1, 1}, '{256, 0, 1024, 0, 0, 0});
    wr_loops(1, g + 13, SB + 64, '{4, 4, 4, 1, 1, 1}, '{256, 1024, 0, 0, 0, 0});
    wr_loops(1, g + 26, SC,      '{16, 1, 1, 1, 1, 1}, '{256, 0, 0, 0, 0, 0});
    csr(1, g + 39, 1, 4, r); csr(1, g + 40, 1, 16, r);
    csr(1, g + 43, 0, 0, r); t0 = r;
    csr(1, g + 41, 1, 0, r);
    wait_idle(1, g + 42);
    csr(1, g + 43, 0, 0, r); busy_cyc = r - t0;
    $display("GeMM: %0d steps in %0d busy cycles, utilization %0d%%", macs, busy_cyc, macs * 100 / busy_cyc);
    checks++; if (macs != 64) begin failures++; $display("steps %0d", macs); end
    checks++; if (macs * 100 < busy_cyc * 75) begin failures++; $display("GeMM utilization too low"); end
    // C out: 64 contiguous beats
    csr(2, D + 9, 0, 0, r); t0 = r;
    csr(2, D + 0, 1, SC, r); csr(2, D + 1, 1, E_C * 64, r); csr(2, D + 2, 1, 64, r);
    csr(2, D + 3, 1, 0, r); csr(2, D + 4, 1, 0, r); csr(2, D + 5, 1, 1, r); csr(2, D + 6, 1, 1, r);
    csr(2, D + 7, 1, 0, r);
    wait_idle(2, D + 8);
    csr(2, D + 9, 0, 0, r); dcyc = r - t0;
    $display("DMA out: 64 beats in %0d busy cycles", dcyc);
    checks++; if (64 * 10 < dcyc * 8) begin failures++; $display("DMA below 0.8 beats per cycle"); end
    for (int mt = 0; mt < 4; mt++) for (int nt = 0; nt < 4; nt++) for (int m = 0; m < 8; m++) for (int n = 0; n < 8; n++) begin
      int e;
      logic [31:0] got;
      e = 0;
      for (int k = 0; k < 32; k++) e += int'(A[mt*8+m][k]) * int'(B[k][nt*8+n]);
      got = ext.mem[E_C + (4*mt + nt)*4 + (m*8+n)/16][((m*8+n)%16)*32 +: 32];
      checks++; if (got !== 32'(e)) begin failures++; if (failures < 5) $display("C(%0d,%0d) = %h, expected %h", mt*8+m, nt*8+n, got, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
