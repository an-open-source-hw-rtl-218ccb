// tb_snax_cluster: end-to-end test of the whole cluster at its default size
// (3 cores, GeMM 8x8x8, MaxPool 8 kernels, 128 kB / 32-bank scratchpad,
// 512-bit DMA). The three management cores are modelled by three testbench
// threads that drive the cores' CSR and data ports, and the external memory
// is a behavioural AXI slave with random stalls. The flow is a small layer
// sequence in the spirit of the paper's examples:
//   1. core 2 has the DMA copy A (two 8x16 int8 matrices), B (16x16) and a
//      4x4x64 feature map from external memory into the scratchpad, using
//      2D transfers; all cores then meet at the hardware barrier.
//   2. core 1 starts GeMM task 1 and preloads task 2 into the double-buffered
//      CSRs while task 1 runs; core 2 starts a 2x2 MaxPool at the same time;
//      core 0 does its own loads and stores to the scratchpad meanwhile, so
//      its low-priority port meets bank conflicts with the accelerators.
//   3. a second barrier (which also waits for all units to be idle); core 0
//      then reads the pooled map through its data port ("FC layer" input).
//   4. core 2 has the DMA copy both GeMM results and the pooled map out to
//      external memory, where they are checked against a reference.
// Every mechanism is counted; the test fails if any count is zero.
module tb_snax_cluster;
  import snax_pkg::*;
  // scratchpad layout (bytes) and external layout (64-byte beats)
  localparam int S_A0 = 'h0000, S_A1 = 'h0400, S_B = 'h0800, S_C0 = 'h1000, S_C1 = 'h2000;
  localparam int S_IMG = 'h3000, S_MP = 'h5000, S_SCR = 'h6000;
  localparam int E_A = 0, E_B = 8, E_IMG = 16, E_C = 64, E_MP = 80;
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
  logic [7:0] A [2][8][16];
  logic [7:0] B [16][16];
  logic [7:0] img [4][4][64];

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
  axi_mem_model #(.BEATS(1024), .STALL_PCT(20)) ext (.clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(ar_v), .ar_ready_o(ar_r), .ar_addr_i(ar_a), .ar_len_i(ar_l),
    .r_valid_o(r_v), .r_ready_i(r_r), .r_data_o(r_d), .r_last_o(r_l),
    .aw_valid_i(aw_v), .aw_ready_o(aw_r), .aw_addr_i(aw_a), .aw_len_i(aw_l),
    .w_valid_i(w_v), .w_ready_o(w_r), .w_data_i(w_d), .w_strb_i(w_s), .w_last_i(w_l),
    .b_valid_o(b_v), .b_ready_i(b_r));

  always #5 clk = ~clk;
  initial begin #20000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---- mechanism counters ----
  int n_dma_in = 0, n_dma_out = 0, n_preload = 0, n_concurrent = 0, n_core_stall = 0;
  int n_xbar_stall = 0, n_axi_stall = 0, n_core_rd = 0, n_gemm = 0, n_pool = 0;
  always @(posedge clk) if (rst_n) begin
    if (ubusy[0] && ubusy[1]) n_concurrent++;
    if (tv[0] && !tr[0] && ubusy[1:0] != 0) n_core_stall++;
    if ((dut.u_xbar.req_valid_i[74:3] & ~dut.u_xbar.req_ready_o[74:3]) != 0) n_xbar_stall++;
    if ((r_v == 0 && ar_v == 0 && ext.ar_addr_q.size() > 0) || (w_v && !w_r)) n_axi_stall++;
  end

  // ---- core models ----
  task automatic csr(input int c, input int addr, input logic w, input logic [31:0] d, output logic [31:0] q);
    @(negedge clk); cv[c] = 1; cq[c] = '{addr: 12'(addr), data: d, write: w};
    #1; while (!cr[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1; cv[c] = 0;
    if (!w) begin while (!crv[c]) begin @(posedge clk); #1; end q = crd[c]; end
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
  task automatic barrier(input int c);
    logic [31:0] q;
    csr(c, CSR_BARRIER, 1, 0, q);
  endtask
  task automatic dma(input int src, input int dst, input int beats, input int ss, input int ds,
                     input int reps, input int dir);
    logic [31:0] q;
    csr(2, CSR_DMA_BASE + 0, 1, src, q); csr(2, CSR_DMA_BASE + 1, 1, dst, q);
    csr(2, CSR_DMA_BASE + 2, 1, beats, q); csr(2, CSR_DMA_BASE + 3, 1, ss, q);
    csr(2, CSR_DMA_BASE + 4, 1, ds, q); csr(2, CSR_DMA_BASE + 5, 1, reps, q);
    csr(2, CSR_DMA_BASE + 6, 1, dir, q); csr(2, CSR_DMA_BASE + 7, 1, 0, q);
    do csr(2, CSR_DMA_BASE + 8, 0, 0, q); while (q[1:0] != 0);
    if (dir == 0) n_dma_in++; else n_dma_out++;
  endtask
  task automatic gemm_task(input int abase, input int cbase);
    logic [31:0] q;
    int g;
    g = CSR_GEMM_BASE;
    csr(1, g + 0, 1, abase, q); csr(1, g + 1, 1, 2, q); csr(1, g + 2, 1, 2, q);
    csr(1, g + 7, 1, 64, q); csr(1, g + 8, 1, 0, q);
    csr(1, g + 13, 1, S_B, q); csr(1, g + 14, 1, 2, q); csr(1, g + 15, 1, 2, q);
    csr(1, g + 20, 1, 64, q); csr(1, g + 21, 1, 128, q);
    csr(1, g + 26, 1, cbase, q); csr(1, g + 27, 1, 2, q); csr(1, g + 33, 1, 256, q);
    csr(1, g + 39, 1, 2, q); csr(1, g + 40, 1, 2, q);
    csr(1, g + 41, 1, 0, q);
    n_gemm++;
  endtask
  task automatic pool_task();
    logic [31:0] q;
    int p;
    p = CSR_MAXPOOL_BASE;
    csr(2, p + 0, 1, S_IMG, q);
    csr(2, p + 1, 1, 2, q); csr(2, p + 2, 1, 2, q); csr(2, p + 3, 1, 2, q); csr(2, p + 4, 1, 2, q);
    csr(2, p + 7, 1, 64, q); csr(2, p + 8, 1, 256, q); csr(2, p + 9, 1, 128, q); csr(2, p + 10, 1, 512, q);
    csr(2, p + 13, 1, S_MP, q); csr(2, p + 14, 1, 4, q); csr(2, p + 20, 1, 64, q);
    csr(2, p + 26, 1, 4, q); csr(2, p + 27, 1, 4, q);
    csr(2, p + 28, 1, 0, q);
    n_pool++;
  endtask

  function automatic logic [63:0] pool_ref(input int oy, input int ox, input int w);
    logic [63:0] e;
    for (int c = 0; c < 8; c++) begin
      logic signed [7:0] mx;
      mx = -128;
      for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++)
        if ($signed(img[oy*2+dy][ox*2+dx][w*8+c]) > mx) mx = img[oy*2+dy][ox*2+dx][w*8+c];
      e[c*8 +: 8] = mx;
    end
    return e;
  endfunction
  function automatic int c_ref(input int which, input int m, input int n);
    int e;
    e = 0;
    for (int k = 0; k < 16; k++) e += int'($signed(A[which][m][k])) * int'($signed(B[k][n]));
    return e;
  endfunction

  initial begin
    logic [31:0] q;
    int rel0;
    cv = 0; cq = '0; tv = 0; tq = '0;
    // operands in external memory
    for (int w = 0; w < 2; w++) for (int m = 0; m < 8; m++) for (int k = 0; k < 16; k++) A[w][m][k] = 8'($urandom);
    for (int k = 0; k < 16; k++) for (int n = 0; n < 16; n++) B[k][n] = 8'($urandom);
    for (int y = 0; y < 4; y++) for (int x = 0; x < 4; x++) for (int c = 0; c < 64; c++) img[y][x][c] = 8'($urandom);
    for (int i = 0; i < 1024; i++) ext.mem[i] = '0;
    for (int w = 0; w < 2; w++) for (int kk = 0; kk < 2; kk++) for (int m = 0; m < 8; m++) for (int k = 0; k < 8; k++)
      ext.mem[E_A + w*2 + kk][(m*8+k)*8 +: 8] = A[w][m][kk*8+k];
    for (int n = 0; n < 2; n++) for (int kk = 0; kk < 2; kk++) for (int k = 0; k < 8; k++) for (int j = 0; j < 8; j++)
      ext.mem[E_B + n*2 + kk][(k*8+j)*8 +: 8] = B[kk*8+k][n*8+j];
    for (int y = 0; y < 4; y++) for (int x = 0; x < 4; x++) for (int c = 0; c < 64; c++)
      ext.mem[E_IMG + y*4 + x][c*8 +: 8] = img[y][x][c];
    repeat (3) @(posedge clk); rst_n = 1;
    rel0 = releases;

    fork
      // ---------------- core 0: barrier, own data traffic, barrier, reads pooled map
      begin
        logic [63:0] d;
        logic [63:0] mine [64];
        barrier(0);
        wait (ubusy[0]);
        for (int i = 0; i < 64; i++) begin mine[i] = {$urandom, $urandom}; st(0, S_SCR + i*8, mine[i]); end
        for (int i = 0; i < 64; i++) begin
          ld(0, S_SCR + i*8, d);
          checks++; if (d !== mine[i]) begin failures++; $display("core 0 scratch word %0d wrong", i); end
        end
        barrier(0);
        for (int p = 0; p < 4; p++) for (int w = 0; w < 8; w++) begin
          ld(0, S_MP + p*64 + w*8, d);
          n_core_rd++;
          checks++; if (d !== pool_ref(p / 2, p % 2, w)) begin failures++; $display("core 0 pooled word %0d.%0d wrong", p, w); end
        end
        barrier(0);
      end
      // ---------------- core 1: GeMM
      begin
        barrier(1);
        gemm_task(S_A0, S_C0);
        wait (ubusy[0]);
        gemm_task(S_A1, S_C1);   // preload while task 1 runs
        csr(1, CSR_GEMM_BASE + 42, 0, 0, q);
        if (q[1]) n_preload++;
        barrier(1);
        barrier(1);
      end
      // ---------------- core 2: DMA in, MaxPool, DMA out
      begin
        // A: 2 rows (matrices) of 2 beats, dst stride 0x400 - a 2D transfer
        dma(E_A*64, S_A0, 2, 128, S_A1 - S_A0, 2, 0);
        dma(E_B*64, S_B, 4, 256, 256, 1, 0);
        dma(E_IMG*64, S_IMG, 4, 256, 256, 4, 0);
        barrier(2);
        pool_task();
        barrier(2);
        barrier(2);
        // results out: both C blocks (2 rows of 8 beats, src stride 0x1000) and the pooled map
        dma(S_C0, E_C*64, 8, S_C1 - S_C0, 512, 2, 1);
        dma(S_MP, E_MP*64, 4, 256, 256, 1, 1);
      end
    join

    // ---- final checks on external memory ----
    for (int w = 0; w < 2; w++) for (int n = 0; n < 2; n++) for (int m = 0; m < 8; m++) for (int j = 0; j < 8; j++) begin
      logic [31:0] got;
      got = ext.mem[E_C + w*8 + n*4 + (m*8+j)/16][((m*8+j)%16)*32 +: 32];
      checks++; if (got !== 32'(c_ref(w, m, n*8+j))) begin failures++; $display("C%0d (%0d,%0d) = %h", w, m, n*8+j, got); end
    end
    for (int p = 0; p < 4; p++) for (int w = 0; w < 8; w++) begin
      checks++; if (ext.mem[E_MP + p][w*64 +: 64] !== pool_ref(p / 2, p % 2, w)) begin failures++; $display("pooled out %0d.%0d wrong", p, w); end
    end
    checks++; if (macs != 8) begin failures++; $display("GeMM PE steps %0d, expected 8", macs); end

    $display("mechanisms: dma_in=%0d dma_out=%0d barrier_releases=%0d gemm_tasks=%0d preload_pending=%0d",
             n_dma_in, n_dma_out, releases - rel0, n_gemm, n_preload);
    $display("            maxpool_tasks=%0d concurrent_cycles=%0d core_conflict_stalls=%0d accel_port_stalls=%0d",
             n_pool, n_concurrent, n_core_stall, n_xbar_stall);
    $display("            axi_stalls=%0d core_reads=%0d gemm_pe_steps=%0d", n_axi_stall, n_core_rd, macs);
    checks++; if (n_dma_in == 0)  begin failures++; $display("no DMA in"); end
    checks++; if (n_dma_out == 0) begin failures++; $display("no DMA out"); end
    checks++; if (releases - rel0 != 3) begin failures++; $display("barrier rounds %0d, expected 3", releases - rel0); end
    checks++; if (n_preload == 0) begin failures++; $display("no double-buffered preload seen"); end
    checks++; if (n_pool == 0 || n_gemm == 0) begin failures++; $display("an accelerator never ran"); end
    checks++; if (n_concurrent == 0) begin failures++; $display("GeMM and MaxPool never ran together"); end
    checks++; if (n_core_stall == 0) begin failures++; $display("core port never lost a conflict"); end
    checks++; if (n_xbar_stall == 0) begin failures++; $display("no accelerator port stall"); end
    checks++; if (n_axi_stall == 0) begin failures++; $display("no AXI back-pressure"); end
    checks++; if (n_core_rd == 0) begin failures++; $display("core never read"); end
    checks++; if (macs == 0) begin failures++; $display("no GeMM steps"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
