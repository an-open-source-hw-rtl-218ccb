// tb_maxpool_tile: the MaxPool tile on a real crossbar and scratchpad.
// Master 0 is the testbench's own port. A 4x4 feature map of 64 int8
// channels (one 512-bit word per pixel, pixel (y,x) at IN+64*(4y+x)) is
// pooled twice: first 2x2 windows with stride 2, then - preloaded through
// the CSRs while the first task runs - 3x3 windows with stride 1. The
// window size is thus changed at run time. Each task gives 2x2 output
// pixels, stored one word each. Results are checked against a reference.
module tb_maxpool_tile;
  import snax_pkg::*;
  localparam int NM = 17;
  localparam logic [11:0] BASE = CSR_MAXPOOL_BASE;
  localparam int IN = 'h0000, O1 = 'h1000, O2 = 'h2000;
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
  int checks = 0, failures = 0;
  logic [7:0] img [4][4][64];

  function automatic logic [NM-1:0][7:0] prio();
    logic [NM-1:0][7:0] p;
    for (int m = 0; m < NM; m++) p[m] = (m == 0) ? 8'd1 : 8'd8;
    return p;
  endfunction

  tcdm_interconnect #(.NUM_MASTERS(NM), .PRIO(prio())) xbar (.clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(mv), .req_ready_o(mr), .req_i(mq), .rsp_valid_o(mrv), .rsp_data_o(mrd),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_row_o(b_row), .bank_strb_o(b_strb), .bank_wdata_o(b_wd),
    .bank_rdata_i(b_rd));
  shared_spm spm (.clk_i(clk), .req_i(b_req), .we_i(b_we), .row_i(b_row), .strb_i(b_strb), .wdata_i(b_wd),
    .rdata_o(b_rd));
  maxpool_tile dut (.clk_i(clk), .rst_ni(rst_n), .csr_req_valid_i(cv), .csr_req_ready_o(cr), .csr_req_i(cq),
    .csr_rsp_valid_o(crv), .csr_rsp_ready_i(1'b1), .csr_rsp_data_o(crd),
    .tcdm_req_valid_o(mv[16:1]), .tcdm_req_ready_i(mr[16:1]), .tcdm_req_o(mq[16:1]),
    .tcdm_rsp_valid_i(mrv[8:1]), .tcdm_rsp_data_i(mrd[8:1]), .busy_o(busy));

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
  // win x win windows with the given stride; loops dx, dy, ox, oy
  task automatic pool_task(input int win, input int step, input int obase);
    logic [31:0] q;
    csr(0, 1, IN, q);
    csr(1, 1, win, q); csr(2, 1, win, q); csr(3, 1, 2, q); csr(4, 1, 2, q);
    csr(7, 1, 64, q); csr(8, 1, 256, q); csr(9, 1, 64*step, q); csr(10, 1, 256*step, q);
    csr(13, 1, obase, q); csr(14, 1, 4, q); csr(20, 1, 64, q);
    csr(26, 1, win*win, q); csr(27, 1, 4, q);
    csr(28, 1, 0, q);
  endtask
  task automatic check_out(input int win, input int step, input int obase);
    for (int oy = 0; oy < 2; oy++) for (int ox = 0; ox < 2; ox++) for (int w = 0; w < 8; w++) begin
      logic [63:0] d, e;
      for (int c = 0; c < 8; c++) begin
        logic signed [7:0] mx;
        mx = -128;
        for (int dy = 0; dy < win; dy++) for (int dx = 0; dx < win; dx++)
          if ($signed(img[oy*step+dy][ox*step+dx][w*8+c]) > mx) mx = img[oy*step+dy][ox*step+dx][w*8+c];
        e[c*8 +: 8] = mx;
      end
      spm_rd(obase + (oy*2+ox)*64 + w*8, d);
      checks++; if (d !== e) begin failures++; $display("win %0d out (%0d,%0d) word %0d: %h vs %h", win, oy, ox, w, d, e); end
    end
  endtask

  initial begin
    logic [31:0] q;
    mv[0] = 0; mq[0] = '0; cv = 0; cq = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int y = 0; y < 4; y++) for (int x = 0; x < 4; x++) for (int w = 0; w < 8; w++) begin
      logic [63:0] d;
      for (int c = 0; c < 8; c++) begin img[y][x][w*8+c] = 8'($urandom); d[c*8 +: 8] = img[y][x][w*8+c]; end
      spm_wr(IN + (y*4+x)*64 + w*8, d);
    end
    pool_task(2, 2, O1);
    wait (busy);
    pool_task(3, 1, O2);   // preloaded while the first task runs
    csr(29, 0, 0, q);
    checks++; if (q[1] != 1'b1) begin failures++; $display("second task not pending"); end
    wait (!busy); repeat (3) @(negedge clk);
    wait (!busy);
    csr(29, 0, 0, q);
    checks++; if (q[1:0] != 0) begin failures++; $display("not idle"); end
    check_out(2, 2, O1);
    check_out(3, 1, O2);
    csr(30, 0, 0, q);
    // 16 + 36 window words at one word per cycle, plus pipeline fill
    checks++; if (q < 52 || q > 80) begin failures++; $display("busy cycles %0d out of range", q); end
    $display("busy cycles for 52 window words: %0d", q);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
