// tb_spm_bank: byte-strobed writes and reads against an array model. Checks
// that read data appears exactly one cycle after the request and holds
// until the next read.
module tb_spm_bank;
  localparam int DW = 64, DEPTH = 32;
  logic clk = 0;
  logic req, we;
  logic [$clog2(DEPTH)-1:0] addr;
  logic [7:0] strb;
  logic [DW-1:0] wdata, rdata;
  logic [DW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  spm_bank #(.DW(DW), .DEPTH(DEPTH)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr),
    .strb_i(strb), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    req = 0; we = 0; addr = 0; strb = 0; wdata = 0;
    // initialise every row with full writes
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); req = 1; we = 1; addr = i; strb = '1; wdata = {$urandom, $urandom}; model[i] = wdata;
    end
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      req = 1; we = $urandom % 2; addr = $urandom % DEPTH; strb = $urandom; wdata = {$urandom, $urandom};
      if (we) begin
        for (int b = 0; b < 8; b++) if (strb[b]) model[addr][b*8 +: 8] = wdata[b*8 +: 8];
      end else begin
        logic [DW-1:0] exp;
        exp = model[addr];
        @(negedge clk); req = 0;
        checks++; if (rdata !== exp) begin failures++; $display("read %0d: %h exp %h", addr, rdata, exp); end
        @(negedge clk);   // data held while idle
        checks++; if (rdata !== exp) begin failures++; $display("hold failed"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
