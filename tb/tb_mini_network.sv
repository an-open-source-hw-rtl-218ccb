// tb_mini_network: the small three-layer network (input 18x18x16 int8,
// 3x3 convolution to 16x16x16, 2x2 max-pool, fully connected to 10 outputs)
// run on the full-size cluster, layer by layer.
//  - core 2: the DMA brings the input and the weights from external memory.
//  - core 1: one GeMM task computes the whole convolution as 1,152 8x8x8
//    steps. The six hardware loops of the A streamer form the im2col view on
//    the fly: A tile = 8 neighbouring pixels x 8 input channels of one tap,
//    with the input stored as [cblk][y][x][8 ch] so that such a tile is 64
//    contiguous bytes. Loops, innermost first: dx, dy, cblk (K), then nblk,
//    x0, y (output tiles). B walks the weights with the same K loops.
//  - core 0: requantizes the int32 result to int8 (arithmetic shift by 10,
//    saturated - no unit of the cluster does this) through its data port,
//    into a layout where the words of one pooling window line up lane by lane.
//  - core 2: one MaxPool task pools 16x16x16 to 8x8x16 (2x2, stride 2).
//  - core 0: reads the pooled map and computes the fully connected layer.
// Every intermediate result is checked against a reference model. The GeMM
// PE utilization (steps / busy cycles) must be at least 70%: the sliding
// A tiles share banks with the B tiles on about half the steps, and a lane
// that loses a cycle cannot make it up, so about 74% is expected here.
module tb_mini_network;
  import snax_pkg::*;
  localparam int S_IN = 'h0000, S_W = 'h2000, S_C = 'h4000, S_Q = 'h8000, S_P = 'h9000;
  localparam int E_IN = 0, E_W = 128;   // external beats
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
  logic signed [7:0]  x   [18][18][16];
  logic signed [7:0]  wt  [3][3][16][16];   // [dy][dx][cin][cout]
  logic signed [31:0] conv[16][16][16];
  logic signed [7:0]  q   [16][16][16];
  logic signed [7:0]  pool[8][8][16];
  logic signed [7:0]  fcw [10][1024];

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
  axi_mem_model #(.BEATS(256)) ext (.clk_i(clk), .rst_ni(rst_n),
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
    logic [63:0] d;
    int g, p, t0, t1, busy_cyc;
    cv = 0; cq = '0; tv = 0; tq = '0;
    // ---- data and references ----
    for (int y = 0; y < 18; y++) for (int xx = 0; xx < 18; xx++) for (int c = 0; c < 16; c++) x[y][xx][c] = 8'($urandom);
    for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) for (int i = 0; i < 16; i++) for (int o = 0; o < 16; o++)
      wt[a][b][i][o] = 8'($urandom);
    for (int o = 0; o < 10; o++) for (int i = 0; i < 1024; i++) fcw[o][i] = 8'($urandom);
    for (int y = 0; y < 16; y++) for (int xx = 0; xx < 16; xx++) for (int o = 0; o < 16; o++) begin
      int s;
      s = 0;
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) for (int i = 0; i < 16; i++)
        s += int'(x[y+a][xx+b][i]) * int'(wt[a][b][i][o]);
      conv[y][xx][o] = s;
      s = s >>> 10;
      q[y][xx][o] = (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : 8'(s);
    end
    for (int y = 0; y < 8; y++) for (int xx = 0; xx < 8; xx++) for (int c = 0; c < 16; c++) begin
      logic signed [7:0] m;
      m = -128;
      for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) if (q[2*y+a][2*xx+b][c] > m) m = q[2*y+a][2*xx+b][c];
      pool[y][xx][c] = m;
    end
    // external memory: input as [cblk][y][x][8 ch], weights as 64-byte B tiles
    for (int i = 0; i < 256; i++) ext.mem[i] = '0;
    for (int cb = 0; cb < 2; cb++) for (int y = 0; y < 18; y++) for (int xx = 0; xx < 18; xx++) for (int k = 0; k < 8; k++) begin
      int a;
      a = ((cb*18 + y)*18 + xx)*8 + k;
      ext.mem[E_IN + a/64][(a%64)*8 +: 8] = x[y][xx][cb*8+k];
    end
    for (int nb = 0; nb < 2; nb++) for (int cb = 0; cb < 2; cb++) for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
      for (int k = 0; k < 8; k++) for (int n = 0; n < 8; n++)
        ext.mem[E_W + ((nb*2 + cb)*3 + a)*3 + b][(k*8+n)*8 +: 8] = wt[a][b][cb*8+k][nb*8+n];
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- layer 0: DMA in ----
    dma_in(E_IN, S_IN, 81);    // 5,184 bytes
    dma_in(E_W, S_W, 36);      // 2,304 bytes

    // ---- layer 1: convolution on the GeMM ----
    g = CSR_GEMM_BASE;
    wr_loops(1, g + 0,  S_IN, '{3, 3, 2, 2, 2, 16}, '{8, 144, 2592, 0, 64, 144});
    wr_loops(1, g + 13, S_W,  '{3, 3, 2, 2, 2, 16}, '{64, 192, 576, 1152, 0, 0});
    wr_loops(1, g + 26, S_C,  '{2, 2, 16, 1, 1, 1}, '{256, 512, 1024, 0, 0, 0});
    csr(1, g + 39, 1, 18, r); csr(1, g + 40, 1, 64, r);
    csr(1, g + 43, 0, 0, r); t0 = r;
    csr(1, g + 41, 1, 0, r);
    wait_idle(1, g + 42);
    csr(1, g + 43, 0, 0, r); busy_cyc = r - t0;
    $display("conv: %0d GeMM steps in %0d busy cycles, utilization %0d%%", macs, busy_cyc, macs * 100 / busy_cyc);
    checks++; if (macs != 1152) begin failures++; $display("steps %0d, expected 1152", macs); end
    checks++; if (macs * 100 < busy_cyc * 70) begin failures++; $display("utilization below 70%%"); end

    // ---- core 0: check conv output and requantize into the pooling layout ----
    for (int y = 0; y < 16; y++) for (int x0 = 0; x0 < 2; x0++) for (int nb = 0; nb < 2; nb++)
      for (int w = 0; w < 32; w++) begin
        int m, n;
        ld(0, S_C + ((y*2 + x0)*2 + nb)*256 + w*8, d);
        m = (w*2) / 8; n = (w*2) % 8;
        checks++;
        if (d !== {conv[y][x0*8+m][nb*8+n+1], conv[y][x0*8+m][nb*8+n]}) begin
          failures++; if (failures < 5) $display("conv y%0d x%0d o%0d: %h", y, x0*8+m, nb*8+n, d);
        end
      end
    // requantized map: word (y, xpar, grp) = pixels x = 2*(4*grp + j) + xpar, j = 0..3, 16 channels each
    for (int y = 0; y < 16; y++) for (int xp = 0; xp < 2; xp++) for (int gr = 0; gr < 2; gr++)
      for (int w = 0; w < 8; w++) begin
        logic [63:0] v;
        for (int bb = 0; bb < 8; bb++) begin
          int byte_i, j, c, s;
          logic [63:0] cd;
          byte_i = w*8 + bb; j = byte_i / 16; c = byte_i % 16;
          ld(0, S_C + ((y*2 + (2*(4*gr+j)+xp)/8)*2 + c/8)*256 + (((2*(4*gr+j)+xp)%8)*8 + c%8)*4 / 8 * 8, cd);
          s = int'($signed(cd[((((2*(4*gr+j)+xp)%8)*8 + c%8) % 2)*32 +: 32])) >>> 10;
          v[bb*8 +: 8] = (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : 8'(s);
        end
        st(0, S_Q + ((y*2 + xp)*2 + gr)*64 + w*8, v);
      end

    // ---- layer 2: max-pool on the MaxPool unit ----
    p = CSR_MAXPOOL_BASE;
    wr_loops(2, p + 0,  S_Q, '{2, 2, 2, 8, 1, 1}, '{128, 256, 64, 512, 0, 0});
    wr_loops(2, p + 13, S_P, '{16, 1, 1, 1, 1, 1}, '{64, 0, 0, 0, 0, 0});
    csr(2, p + 26, 1, 4, r); csr(2, p + 27, 1, 16, r);
    csr(2, p + 28, 1, 0, r);
    wait_idle(2, p + 29);

    // ---- layer 3: fully connected on core 0 ----
    begin
      logic signed [7:0] pv [1024];
      for (int oy = 0; oy < 8; oy++) for (int gr = 0; gr < 2; gr++) for (int w = 0; w < 8; w++) begin
        ld(0, S_P + (oy*2 + gr)*64 + w*8, d);
        for (int bb = 0; bb < 8; bb++) begin
          int j, c;
          j = (w*8 + bb) / 16; c = (w*8 + bb) % 16;
          pv[(oy*8 + 4*gr + j)*16 + c] = d[bb*8 +: 8];
          checks++;
          if (d[bb*8 +: 8] !== pool[oy][4*gr+j][c]) begin
            failures++; if (failures < 5) $display("pool (%0d,%0d,%0d): %h vs %h", oy, 4*gr+j, c, d[bb*8 +: 8], pool[oy][4*gr+j][c]);
          end
        end
      end
      for (int o = 0; o < 10; o++) begin
        int s, e;
        s = 0; e = 0;
        for (int i = 0; i < 1024; i++) begin
          s += int'(pv[i]) * int'(fcw[o][i]);
          e += int'(pool[i/128][(i/16)%8][i%16]) * int'(fcw[o][i]);
        end
        checks++; if (s != e) begin failures++; $display("fc output %0d", o); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
