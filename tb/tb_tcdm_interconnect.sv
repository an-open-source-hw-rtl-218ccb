// tb_tcdm_interconnect: four masters, two of class 1 and two of class 4,
// in front of four banks.
// Directed part: all four masters hit one bank. Only the class-4 masters may
// be granted while they request, and they alternate (round-robin). Random
// part: each master reads and writes its own rows at random banks; read data
// (one cycle after the grant) is checked against a model. Every bank
// conflict cycle is counted.
module tb_tcdm_interconnect;
  import snax_pkg::*;
  localparam int NM = 4, NB = 4, DEPTH = 16;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic [NM-1:0] valid, ready, rvalid;
  tcdm_req_t [NM-1:0] req;
  logic [NM-1:0][63:0] rdata;
  logic [NB-1:0] b_req, b_we;
  logic [NB-1:0][3:0] b_row;
  logic [NB-1:0][7:0] b_strb;
  logic [NB-1:0][63:0] b_wdata, b_rdata;
  int checks = 0, failures = 0, conflicts = 0;
  logic [63:0] model [NB*DEPTH];

  tcdm_interconnect #(.NUM_MASTERS(NM), .NUM_BANKS(NB), .DEPTH(DEPTH), .PRIO({8'd4, 8'd4, 8'd1, 8'd1})) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(valid), .req_ready_o(ready), .req_i(req),
    .rsp_valid_o(rvalid), .rsp_data_o(rdata), .bank_req_o(b_req), .bank_we_o(b_we), .bank_row_o(b_row),
    .bank_strb_o(b_strb), .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata));
  shared_spm #(.NUM_BANKS(NB), .DEPTH(DEPTH)) mem (.clk_i(clk), .req_i(b_req), .we_i(b_we), .row_i(b_row),
    .strb_i(b_strb), .wdata_i(b_wdata), .rdata_o(b_rdata));

  always #5 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic [NM-1:0] exp_v, gnt;
  logic [NM-1:0][63:0] exp_d;

  int wins [NM];
  initial begin
    valid = 0; req = '0; exp_v = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // fill memory through master 0
    for (int a = 0; a < NB*DEPTH; a++) begin
      @(negedge clk); exp_v = 0;
      valid = 4'b0001; req[0] = '{addr: TCDM_AW'(a*8), we: 1, strb: '1, data: {32'(a), $urandom}};
      model[a] = req[0].data;
      @(posedge clk); while (!ready[0]) @(posedge clk);
    end
    // directed conflict: everyone to bank 0
    @(negedge clk); valid = '1; exp_v = 0;
    for (int m = 0; m < NM; m++) req[m] = '{addr: TCDM_AW'(m*NB*8), we: 0, strb: 0, data: 0};
    for (int i = 0; i < 6; i++) begin
      #1;
      checks++; if ($countones(ready) != 1 || (ready & 4'b0011) != 0) begin failures++; $display("priority violated ready=%b", ready); end
      for (int m = 0; m < NM; m++) if (ready[m]) wins[m]++;
      @(negedge clk); exp_v = 0;
    end
    checks++; if (wins[2] != 3 || wins[3] != 3) begin failures++; $display("no round robin: %0d %0d", wins[2], wins[3]); end
    // the class-4 masters stop right after a grant; then the class-1 masters are served one per cycle
    while (valid[3:2] != 0) begin
      logic [NM-1:0] g;
      #1; g = ready & valid & 4'b1100;
      checks++; if ((ready & 4'b0011) != 0) failures++;
      @(posedge clk); #1; valid = valid & ~g;
      @(negedge clk);
    end
    while (valid != 0) begin
      logic [NM-1:0] g;
      #1; g = ready & valid;
      checks++; if ($countones(g) != 1) begin failures++; $display("class-1 masters not served"); end
      @(posedge clk); #1; valid = valid & ~g;
      @(negedge clk);
    end
    @(negedge clk);
    // random traffic: master m owns the rows with row % NM == m, in any bank
    exp_v = 0; gnt = 0;
    for (int i = 0; i < 3000; i++) begin
      // responses to the reads granted in the previous cycle
      for (int m = 0; m < NM; m++) begin
        checks++;
        if (rvalid[m] != exp_v[m] || (exp_v[m] && rdata[m] !== exp_d[m])) begin
          failures++; $display("m%0d rvalid %b data %h exp %b %h", m, rvalid[m], rdata[m], exp_v[m], exp_d[m]);
        end
      end
      for (int m = 0; m < NM; m++) begin
        if (!valid[m] || gnt[m]) begin
          int w;
          w = (((($urandom % (DEPTH/NM)) * NM) + m) * NB) + ($urandom % NB);
          valid[m] = $urandom % 3 != 0;
          req[m] = '{addr: TCDM_AW'(w*8), we: 1'($urandom % 2), strb: '1, data: {$urandom, $urandom}};
        end
      end
      #1;
      gnt = valid & ready;
      if ((valid & ~ready) != 0) conflicts++;
      for (int m = 0; m < NM; m++) begin
        exp_v[m] = valid[m] && ready[m] && !req[m].we;
        exp_d[m] = model[req[m].addr[TCDM_AW-1:3]];
        if (valid[m] && ready[m] && req[m].we) model[req[m].addr[TCDM_AW-1:3]] = req[m].data;
      end
      @(negedge clk);
    end
    valid = 0;
    @(negedge clk); @(negedge clk);
    checks++; if (conflicts == 0) begin failures++; $display("no bank conflict seen"); end
    $display("bank conflict cycles: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
