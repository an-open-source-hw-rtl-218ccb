// tb_shared_spm: all banks written in the same cycle with distinct data,
// then read back in parallel. Checks bank independence and the
// one-cycle read latency.
module tb_shared_spm;
  localparam int NB = 8, DEPTH = 16;
  logic clk = 0;
  logic [NB-1:0] req, we;
  logic [NB-1:0][3:0] row;
  logic [NB-1:0][7:0] strb;
  logic [NB-1:0][63:0] wdata, rdata;
  logic [63:0] model [NB][DEPTH];
  int checks = 0, failures = 0;

  shared_spm #(.NUM_BANKS(NB), .DEPTH(DEPTH), .DW(64)) dut (.clk_i(clk), .req_i(req), .we_i(we),
    .row_i(row), .strb_i(strb), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    req = 0; we = 0; row = 0; strb = '1; wdata = 0;
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk);
      req = '1; we = '1;
      for (int b = 0; b < NB; b++) begin
        row[b] = r; wdata[b] = {$urandom, $urandom}; model[b][r] = wdata[b];
      end
    end
    for (int i = 0; i < 200; i++) begin
      logic [NB-1:0][3:0] rr;
      @(negedge clk);
      req = NB'($urandom); we = '0;
      for (int b = 0; b < NB; b++) begin row[b] = $urandom % DEPTH; rr[b] = row[b]; end
      @(negedge clk);
      for (int b = 0; b < NB; b++) if (req[b]) begin
        checks++; if (rdata[b] !== model[b][rr[b]]) begin failures++; $display("bank %0d row %0d: %h", b, rr[b], rdata[b]); end
      end
      req = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
