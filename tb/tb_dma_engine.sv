// tb_dma_engine: the 2D DMA between a behavioural AXI memory and the real
// crossbar and scratchpad. Master 0 of the crossbar is the testbench's port.
// 1. ext -> SPM: 3 rows of 4 beats, source stride 5 beats, destination
//    stride 8 beats, with no bus stalls. The busy time must stay within a
//    few cycles of 12 (one 512-bit beat per cycle).
// 2. SPM -> ext: the same block copied back out to a third layout (dest
//    stride 6 beats), with 30% random stalls on every AXI channel.
// 3. A random ext -> SPM transfer with stalls.
// Every byte moved is checked; bytes next to the rows must stay untouched.
module tb_dma_engine;
  import snax_pkg::*;
  localparam int NM = 9;
  localparam logic [11:0] BASE = CSR_DMA_BASE;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic [NM-1:0] mv, mr, mrv;
  tcdm_req_t [NM-1:0] mq;
  logic [NM-1:0][63:0] mrd;
  logic [31:0] b_req, b_we;
  logic [31:0][8:0] b_row;
  logic [31:0][7:0] b_strb;
  logic [31:0][63:0] b_wd, b_rd;
  logic cv, cr, crv, busy;
  csr_req_t cq;
  logic [31:0] crd;
  logic ar_v, ar_r, r_v, r_r, r_l, aw_v, aw_r, w_v, w_r, w_l, b_v, b_r;
  logic [31:0] ar_a, aw_a;
  logic [7:0] ar_l, aw_l;
  logic [511:0] r_d, w_d;
  logic [63:0] w_s;
  int checks = 0, failures = 0;

  tcdm_interconnect #(.NUM_MASTERS(NM), .PRIO({8'd8, 8'd8, 8'd8, 8'd8, 8'd8, 8'd8, 8'd8, 8'd8, 8'd1})) xbar (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(mv), .req_ready_o(mr), .req_i(mq), .rsp_valid_o(mrv), .rsp_data_o(mrd),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_row_o(b_row), .bank_strb_o(b_strb), .bank_wdata_o(b_wd),
    .bank_rdata_i(b_rd));
  shared_spm spm (.clk_i(clk), .req_i(b_req), .we_i(b_we), .row_i(b_row), .strb_i(b_strb), .wdata_i(b_wd),
    .rdata_o(b_rd));
  dma_engine dut (.clk_i(clk), .rst_ni(rst_n), .csr_req_valid_i(cv), .csr_req_ready_o(cr), .csr_req_i(cq),
    .csr_rsp_valid_o(crv), .csr_rsp_ready_i(1'b1), .csr_rsp_data_o(crd),
    .ar_valid_o(ar_v), .ar_ready_i(ar_r), .ar_addr_o(ar_a), .ar_len_o(ar_l),
    .r_valid_i(r_v), .r_ready_o(r_r), .r_data_i(r_d), .r_last_i(r_l),
    .aw_valid_o(aw_v), .aw_ready_i(aw_r), .aw_addr_o(aw_a), .aw_len_o(aw_l),
    .w_valid_o(w_v), .w_ready_i(w_r), .w_data_o(w_d), .w_strb_o(w_s), .w_last_o(w_l),
    .b_valid_i(b_v), .b_ready_o(b_r),
    .tcdm_req_valid_o(mv[8:1]), .tcdm_req_ready_i(mr[8:1]), .tcdm_req_o(mq[8:1]),
    .tcdm_rsp_valid_i(mrv[8:1]), .tcdm_rsp_data_i(mrd[8:1]), .busy_o(busy));
  axi_mem_model #(.BEATS(256)) ext (.clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(ar_v), .ar_ready_o(ar_r), .ar_addr_i(ar_a), .ar_len_i(ar_l),
    .r_valid_o(r_v), .r_ready_i(r_r), .r_data_o(r_d), .r_last_o(r_l),
    .aw_valid_i(aw_v), .aw_ready_o(aw_r), .aw_addr_i(aw_a), .aw_len_i(aw_l),
    .w_valid_i(w_v), .w_ready_o(w_r), .w_data_i(w_d), .w_strb_i(w_s), .w_last_i(w_l),
    .b_valid_o(b_v), .b_ready_i(b_r));

  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic spm_wr(input int a, input logic [63:0] d);
    @(negedge clk); mv[0] = 1; mq[0] = '{addr: TCDM_AW'(a), we: 1, strb: '1, data: d};
    #1; while (!mr[0]) begin @(negedge clk); #1; end
    @(posedge clk); #1; mv[0] = 0;
  endtask
  task automatic spm_rd(input int a, output logic [63:0] d);
    @(negedge clk); mv[0] = 1; mq[0] = '{addr: TCDM_AW'(a), we: 0, strb: '0, data: '0};
    #1; while (!mr[0]) begin @(negedge clk); #1; end
    @(posedge clk); #1; mv[0] = 0; d = mrd[0];
  endtask
  task automatic csr(input int off, input logic w, input logic [31:0] d, output logic [31:0] q);
    @(negedge clk); cv = 1; cq = '{addr: BASE + 12'(off), data: d, write: w};
    #1; while (!cr) begin @(negedge clk); #1; end
    @(posedge clk); #1; cv = 0;
    if (!w) begin while (!crv) begin @(posedge clk); #1; end q = crd; end
  endtask
  // runs one transfer to completion and returns its busy cycles
  task automatic xfer(input int src, input int dst, input int beats, input int ss, input int ds,
                      input int reps, input int dir, output int cyc);
    logic [31:0] q, p0;
    csr(9, 0, 0, p0);
    csr(0, 1, src, q); csr(1, 1, dst, q); csr(2, 1, beats, q); csr(3, 1, ss, q);
    csr(4, 1, ds, q); csr(5, 1, reps, q); csr(6, 1, dir, q); csr(7, 1, 0, q);
    wait (busy); wait (!busy);
    csr(9, 0, 0, q);
    cyc = q - p0;
  endtask
  // scratchpad beat at byte address a, read as 8 words
  task automatic spm_beat(input int a, output logic [511:0] v);
    for (int l = 0; l < 8; l++) begin logic [63:0] d; spm_rd(a + l*8, d); v[l*64 +: 64] = d; end
  endtask

  initial begin
    int cyc;
    logic [511:0] v, guard;
    mv[0] = 0; mq[0] = '0; cv = 0; cq = '0;
    guard = {16{32'hDEADBEEF}};
    for (int i = 0; i < 256; i++) ext.mem[i] = {16{$urandom}};
    repeat (3) @(posedge clk); rst_n = 1;
    // guard beats right after each destination row
    for (int r = 0; r < 3; r++) for (int l = 0; l < 8; l++) spm_wr('h1000 + r*512 + 256 + l*8, guard[l*64 +: 64]);
    // 1. ext -> SPM
    xfer(64*10, 'h1000, 4, 64*5, 64*8, 3, 0, cyc);
    $display("ext->SPM 12 beats: %0d busy cycles", cyc);
    checks++; if (cyc > 12 + 8) begin failures++; $display("too slow"); end
    for (int r = 0; r < 3; r++) begin
      for (int b = 0; b < 4; b++) begin
        spm_beat('h1000 + r*512 + b*64, v);
        checks++; if (v !== ext.mem[10 + r*5 + b]) begin failures++; $display("row %0d beat %0d wrong", r, b); end
      end
      spm_beat('h1000 + r*512 + 256, v);
      checks++; if (v !== guard) begin failures++; $display("guard after row %0d overwritten", r); end
    end
    // 2. SPM -> ext with stalls
    ext.stall_pct = 30;
    for (int i = 100; i < 130; i++) ext.mem[i] = '0;
    xfer('h1000, 64*100, 4, 64*8, 64*6, 3, 1, cyc);
    $display("SPM->ext 12 beats with stalls: %0d busy cycles", cyc);
    for (int r = 0; r < 3; r++) for (int b = 0; b < 6; b++) begin
      checks++;
      if (b < 4 && ext.mem[100 + r*6 + b] !== ext.mem[10 + r*5 + b]) begin failures++; $display("out row %0d beat %0d wrong", r, b); end
      if (b >= 4 && ext.mem[100 + r*6 + b] !== '0) begin failures++; $display("out gap %0d %0d written", r, b); end
    end
    // 3. random ext -> SPM with stalls
    for (int t = 0; t < 4; t++) begin
      int beats, reps, ss, ds, src, dst;
      beats = 1 + $urandom % 6; reps = 1 + $urandom % 4;
      ss = beats + $urandom % 4; ds = beats + $urandom % 3;
      src = $urandom % 64; dst = 'h4000 + ($urandom % 64) * 64;
      xfer(src*64, dst, beats, ss*64, ds*64, reps, 0, cyc);
      for (int r = 0; r < reps; r++) for (int b = 0; b < beats; b++) begin
        spm_beat(dst + (r*ds + b)*64, v);
        checks++; if (v !== ext.mem[src + r*ss + b]) begin failures++; $display("t%0d row %0d beat %0d wrong", t, r, b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
