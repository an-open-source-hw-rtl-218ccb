// tb_sync_fifo: random pushes and pops against a queue model. Checks the
// data order, the full/empty flags, the fill count, and that an item can be
// popped the cycle after it is pushed.
module tb_sync_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;   // a falling edge, so the asynchronous reset fires
  logic pv, pr, ov, orr;
  logic [W-1:0] pd, od;
  logic [$clog2(D+1)-1:0] cnt;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n), .push_valid_i(pv), .push_ready_o(pr),
    .push_data_i(pd), .pop_valid_o(ov), .pop_ready_i(orr), .pop_data_o(od), .count_o(cnt));

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    pv = 0; orr = 0; pd = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      pv = ($urandom % 3) != 0; pd = W'($urandom); orr = (i > 1000) ? ($urandom % 4 != 0) : ($urandom % 2 == 0);
      // flags against the model
      checks++; if (pr != (model.size() < D) || ov != (model.size() > 0) || int'(cnt) != model.size()) begin
        failures++; $display("flag mismatch size=%0d pr=%b ov=%b cnt=%0d", model.size(), pr, ov, cnt); end
      if (ov && orr) begin
        checks++; if (od !== model[0]) begin failures++; $display("data %h exp %h", od, model[0]); end
      end
      @(posedge clk);
      if (ov && orr) void'(model.pop_front());
      if (pv && pr) model.push_back(pd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
