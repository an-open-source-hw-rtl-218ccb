// tb_csr_router: two register-file targets behind one core port. Checks that
// writes land in the right target only, that reads return the right
// target's data, that a target's stall reaches the core, and that an
// unmapped read returns 0.
module tb_csr_router;
  import snax_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic valid, ready, rvalid;
  csr_req_t req;
  logic [31:0] rdata;
  logic [1:0] t_valid, t_ready, t_rvalid, t_rready;
  csr_req_t [1:0] t_req;
  logic [1:0][31:0] t_rdata;
  logic [31:0] regs [2][4];
  int checks = 0, failures = 0;

  csr_router #(.NT(2), .BASE({12'h200, 12'h100}), .SIZE({12'd4, 12'd4})) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(valid), .req_ready_o(ready), .req_i(req),
    .rsp_valid_o(rvalid), .rsp_ready_i(1'b1), .rsp_data_o(rdata),
    .t_req_valid_o(t_valid), .t_req_ready_i(t_ready), .t_req_o(t_req),
    .t_rsp_valid_i(t_rvalid), .t_rsp_ready_o(t_rready), .t_rsp_data_i(t_rdata));

  // targets: register files; target 1 is ready only every other cycle
  logic tog;
  always_ff @(posedge clk) begin
    tog <= !tog;
    for (int t = 0; t < 2; t++) begin
      t_rvalid[t] <= 1'b0;
      if (t_valid[t] && t_ready[t]) begin
        if (t_req[t].write) regs[t][t_req[t].addr[1:0]] <= t_req[t].data;
        else begin t_rvalid[t] <= 1'b1; t_rdata[t] <= regs[t][t_req[t].addr[1:0]]; end
      end
    end
  end
  assign t_ready = {tog, 1'b1};

  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic acc(input logic [11:0] a, input logic w, input logic [31:0] d, output logic [31:0] q);
    @(negedge clk); valid = 1; req = '{addr: a, data: d, write: w};
    #1; while (!ready) begin @(negedge clk); #1; end
    @(posedge clk); #1; valid = 0;
    if (!w) begin while (!rvalid) begin @(posedge clk); #1; end q = rdata; end
  endtask

  initial begin
    logic [31:0] q;
    valid = 0; req = '0; tog = 0;
    for (int t = 0; t < 2; t++) for (int r = 0; r < 4; r++) regs[t][r] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      acc(12'h100 + 12'(r), 1, 32'hA0 + r, q);
      acc(12'h200 + 12'(r), 1, 32'hB0 + r, q);
    end
    for (int r = 0; r < 4; r++) begin
      checks++; if (regs[0][r] != 32'hA0 + r || regs[1][r] != 32'hB0 + r) begin failures++; $display("write routing %0d", r); end
      acc(12'h100 + 12'(r), 0, 0, q); checks++; if (q != 32'hA0 + r) begin failures++; $display("read t0 %h", q); end
      acc(12'h200 + 12'(r), 0, 0, q); checks++; if (q != 32'hB0 + r) begin failures++; $display("read t1 %h", q); end
    end
    // just outside each window: must count as unmapped
    acc(12'h104, 1, 32'hDEAD, q);
    acc(12'h0FF, 1, 32'hDEAD, q);
    acc(12'h204, 1, 32'hDEAD, q);
    acc(12'h104, 0, 0, q); checks++; if (q != 0) begin failures++; $display("read past window %h", q); end
    acc(12'h300, 1, 32'hDEAD, q);
    acc(12'h300, 0, 0, q); checks++; if (q != 0) begin failures++; $display("unmapped read %h", q); end
    checks++; if (regs[0][0] != 32'hA0 || regs[1][0] != 32'hB0) begin failures++; $display("unmapped write leaked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
