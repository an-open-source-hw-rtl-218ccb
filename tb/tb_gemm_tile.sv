// tb_gemm_tile: the GeMM tile on a real crossbar and scratchpad. Master 0
// is the testbench's own port, used to load operands and read results.
// Two tasks are given: C0 = A(8x16) * B(16x16), and the same product with
// A replaced by A2 into C1. The second task is preloaded through the CSRs
// while the first runs (double buffering: START accepted while busy, STATUS
// shows pending). Both results are checked against a reference product, and
// the PE-step count must equal the number of 8x8x8 steps.
// Operand layout: A k-tile kk at A+64*kk; B tile (n,kk) at B+64*(2n+kk);
// C tile n at C+256*n.
module tb_gemm_tile;
  import snax_pkg::*;
  localparam int NM = 49;
  localparam logic [11:0] BASE = CSR_GEMM_BASE;
  localparam int A0 = 'h0000, A1 = 'h0400, BB = 'h0800, C0 = 'h1000, C1 = 'h2000;
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
  logic [31:0] crd, macs;
  int checks = 0, failures = 0;
  logic [7:0] A [2][8][16];
  logic [7:0] B [16][16];

  function automatic logic [NM-1:0][7:0] prio();
    logic [NM-1:0][7:0] p;
    for (int m = 0; m < NM; m++) p[m] = (m == 0) ? 8'd1 : (m < 17) ? 8'd8 : 8'd32;
    return p;
  endfunction

  tcdm_interconnect #(.NUM_MASTERS(NM), .PRIO(prio())) xbar (.clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(mv), .req_ready_o(mr), .req_i(mq), .rsp_valid_o(mrv), .rsp_data_o(mrd),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_row_o(b_row), .bank_strb_o(b_strb), .bank_wdata_o(b_wd),
    .bank_rdata_i(b_rd));
  shared_spm spm (.clk_i(clk), .req_i(b_req), .we_i(b_we), .row_i(b_row), .strb_i(b_strb), .wdata_i(b_wd),
    .rdata_o(b_rd));
  gemm_tile dut (.clk_i(clk), .rst_ni(rst_n), .csr_req_valid_i(cv), .csr_req_ready_o(cr), .csr_req_i(cq),
    .csr_rsp_valid_o(crv), .csr_rsp_ready_i(1'b1), .csr_rsp_data_o(crd),
    .tcdm_req_valid_o(mv[48:1]), .tcdm_req_ready_i(mr[48:1]), .tcdm_req_o(mq[48:1]),
    .tcdm_rsp_valid_i(mrv[16:1]), .tcdm_rsp_data_i(mrd[16:1]), .busy_o(busy), .mac_cycles_o(macs));

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

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
  task automatic prog_task(input int abase, input int cbase);
    logic [31:0] q;
    // channel A: (kk: 2, 64) (n: 2, 0)
    csr(0, 1, abase, q); csr(1, 1, 2, q); csr(2, 1, 2, q); csr(7, 1, 64, q); csr(8, 1, 0, q);
    // channel B: (kk: 2, 64) (n: 2, 128)
    csr(13, 1, BB, q); csr(14, 1, 2, q); csr(15, 1, 2, q); csr(20, 1, 64, q); csr(21, 1, 128, q);
    // channel C: (n: 2, 256)
    csr(26, 1, cbase, q); csr(27, 1, 2, q); csr(33, 1, 256, q);
    csr(39, 1, 2, q); csr(40, 1, 2, q);   // K_TILES, N_OUT
    csr(41, 1, 0, q);                     // START
  endtask
  task automatic check_c(input int which, input int cbase);
    for (int n = 0; n < 2; n++) for (int m = 0; m < 8; m++) for (int nn = 0; nn < 8; nn += 2) begin
      logic [63:0] d;
      int e0, e1;
      e0 = 0; e1 = 0;
      for (int k = 0; k < 16; k++) begin
        e0 += int'($signed(A[which][m][k])) * int'($signed(B[k][n*8+nn]));
        e1 += int'($signed(A[which][m][k])) * int'($signed(B[k][n*8+nn+1]));
      end
      spm_rd(cbase + n*256 + (m*8+nn)*4, d);
      checks++; if (d !== {32'(e1), 32'(e0)}) begin failures++; $display("C%0d n%0d m%0d col%0d: %h", which, n, m, nn, d); end
    end
  endtask

  initial begin
    logic [31:0] q;
    int t0;
    mv[0] = 0; mq[0] = '0; cv = 0; cq = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int w = 0; w < 2; w++) for (int m = 0; m < 8; m++) for (int k = 0; k < 16; k++) A[w][m][k] = 8'($urandom);
    for (int k = 0; k < 16; k++) for (int n = 0; n < 16; n++) B[k][n] = 8'($urandom);
    // A k-tile kk: byte m*8+k' ; B tile (n,kk): byte k'*8+n'
    for (int w = 0; w < 2; w++) for (int kk = 0; kk < 2; kk++) for (int m = 0; m < 8; m++) begin
      logic [63:0] d;
      for (int k = 0; k < 8; k++) d[k*8 +: 8] = A[w][m][kk*8+k];
      spm_wr((w ? A1 : A0) + kk*64 + m*8, d);
    end
    for (int n = 0; n < 2; n++) for (int kk = 0; kk < 2; kk++) for (int k = 0; k < 8; k++) begin
      logic [63:0] d;
      for (int j = 0; j < 8; j++) d[j*8 +: 8] = B[kk*8+k][n*8+j];
      spm_wr(BB + (n*2+kk)*64 + k*8, d);
    end
    prog_task(A0, C0);
    wait (busy);
    prog_task(A1, C1);   // preload while the first task runs
    csr(42, 0, 0, q);
    checks++; if (q[1] != 1'b1) begin failures++; $display("second task not pending, status %b", q[1:0]); end
    wait (!busy); @(negedge clk); @(negedge clk); @(negedge clk);
    wait (!busy);
    csr(42, 0, 0, q);
    checks++; if (q[1:0] != 0) begin failures++; $display("not idle"); end
    check_c(0, C0);
    check_c(1, C1);
    checks++; if (macs != 8) begin failures++; $display("PE steps %0d, expected 8", macs); end
    csr(43, 0, 0, q); $display("busy cycles for two tasks: %0d, PE steps %0d", q, macs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
