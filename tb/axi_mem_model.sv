// axi_mem_model: behavioural external memory with an AXI slave port
// (the subset the DMA uses: INCR bursts of full 512-bit beats), for
// testbenches only. It stands in for the external memory system and the AXI
// network outside the cluster.
// Read bursts are queued and answered in order. Write bursts are queued and
// their data is written as the W beats come. Each burst gets one B response.
// When STALL_PCT > 0, every ready/valid output of the model is dropped at
// random with that probability, to test back-pressure. The array `mem` (in
// 64-byte beats) may be read and written hierarchically by the testbench.
module axi_mem_model #(
  parameter int unsigned BEATS     = 1024,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         ar_valid_i,
  output logic         ar_ready_o,
  input  logic [31:0]  ar_addr_i,
  input  logic [7:0]   ar_len_i,
  output logic         r_valid_o,
  input  logic         r_ready_i,
  output logic [511:0] r_data_o,
  output logic         r_last_o,
  input  logic         aw_valid_i,
  output logic         aw_ready_o,
  input  logic [31:0]  aw_addr_i,
  input  logic [7:0]   aw_len_i,
  input  logic         w_valid_i,
  output logic         w_ready_o,
  input  logic [511:0] w_data_i,
  input  logic [63:0]  w_strb_i,
  input  logic         w_last_i,
  output logic         b_valid_o,
  input  logic         b_ready_i
);
  logic [511:0] mem [BEATS];
  int unsigned ar_addr_q[$], ar_len_q[$], aw_addr_q[$];
  int unsigned rbeat, wbeat, bpend;
  logic go_ar, go_r, go_aw, go_w, go_b;
  int unsigned stall_pct = STALL_PCT;  // a testbench may change it at run time

  // random stalls, redrawn on the falling edge so outputs are stable at the rising edge
  always @(negedge clk_i) begin
    go_ar = ($urandom % 100) >= stall_pct;
    go_r  = ($urandom % 100) >= stall_pct;
    go_aw = ($urandom % 100) >= stall_pct;
    go_w  = ($urandom % 100) >= stall_pct;
    go_b  = ($urandom % 100) >= stall_pct;
  end

  always_comb begin
    ar_ready_o = go_ar && ar_addr_q.size() < 8;
    aw_ready_o = go_aw && aw_addr_q.size() < 8;
    r_valid_o  = go_r && ar_addr_q.size() > 0;
    r_data_o   = (ar_addr_q.size() > 0) ? mem[(ar_addr_q[0] / 64 + rbeat) % BEATS] : '0;
    r_last_o   = (ar_len_q.size() > 0) && (rbeat == ar_len_q[0]);
    w_ready_o  = go_w && aw_addr_q.size() > 0;
    b_valid_o  = go_b && bpend > 0;
  end

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ar_addr_q.delete(); ar_len_q.delete(); aw_addr_q.delete();
      rbeat <= 0; wbeat <= 0; bpend <= 0;
    end else begin
      if (r_valid_o && r_ready_i) begin
        if (r_last_o) begin
          void'(ar_addr_q.pop_front()); void'(ar_len_q.pop_front()); rbeat <= 0;
        end else rbeat <= rbeat + 1;
      end
      if (w_valid_i && w_ready_o) begin
        for (int b = 0; b < 64; b++)
          if (w_strb_i[b]) mem[(aw_addr_q[0] / 64 + wbeat) % BEATS][b*8 +: 8] <= w_data_i[b*8 +: 8];
        if (w_last_i) begin void'(aw_addr_q.pop_front()); wbeat <= 0; end
        else wbeat <= wbeat + 1;
      end
      if (ar_valid_i && ar_ready_o) begin ar_addr_q.push_back(ar_addr_i); ar_len_q.push_back(ar_len_i); end
      if (aw_valid_i && aw_ready_o) aw_addr_q.push_back(aw_addr_i);
      bpend <= bpend + ((w_valid_i && w_ready_o && w_last_i) ? 1 : 0) - ((b_valid_o && b_ready_i) ? 1 : 0);
    end
  end
endmodule
