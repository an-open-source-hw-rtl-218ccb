// tcdm_interconnect: crossbar between the 64-bit word ports of the cluster
// and the banks of the shared scratchpad.
//
// Each master port carries one 64-bit word request with a valid-ready
// handshake. The bank is taken from the word-interleaved address,
// bank = addr[3 +: log2(NUM_BANKS)], and the row from the bits above it.
// Consecutive words therefore sit in consecutive banks, and a 512-bit port
// that is split into 8 word ports touches 8 different banks.
//
// Bank conflicts are settled per bank and per cycle, in two steps, as the
// paper describes: "round-robin scheduling ... prioritizing higher-bandwidth
// ports". First, only the requests whose priority class PRIO[m] is the
// highest among those to that bank take part. The top sets PRIO[m] to the
// width, in words, of the wide port that master m belongs to. Second, a
// round-robin pointer per bank picks one of them. The pointer then moves past
// the winner. A losing master keeps its request up and stalls.
//
// Timing: the grant (req_ready_o) is combinational in the request cycle. Read
// data comes back on rsp_data_o with rsp_valid_o one cycle later. Writes give
// no response. A master must not drop or change a request that has not been
// granted (checked by an assertion).
module tcdm_interconnect
  import snax_pkg::*;
#(
  parameter int unsigned NUM_MASTERS = 4,
  parameter int unsigned NUM_BANKS   = snax_pkg::NUM_BANKS,
  parameter int unsigned DEPTH       = snax_pkg::BANK_DEPTH,
  parameter logic [NUM_MASTERS-1:0][7:0] PRIO = '{default: 8'd1}
) (
  input  logic                                    clk_i,
  input  logic                                    rst_ni,
  // master side
  input  logic      [NUM_MASTERS-1:0]             req_valid_i,
  output logic      [NUM_MASTERS-1:0]             req_ready_o,
  input  tcdm_req_t [NUM_MASTERS-1:0]             req_i,
  output logic      [NUM_MASTERS-1:0]             rsp_valid_o,
  output logic      [NUM_MASTERS-1:0][TCDM_DW-1:0] rsp_data_o,
  // bank side
  output logic [NUM_BANKS-1:0]                    bank_req_o,
  output logic [NUM_BANKS-1:0]                    bank_we_o,
  output logic [NUM_BANKS-1:0][$clog2(DEPTH)-1:0] bank_row_o,
  output logic [NUM_BANKS-1:0][TCDM_BW-1:0]       bank_strb_o,
  output logic [NUM_BANKS-1:0][TCDM_DW-1:0]       bank_wdata_o,
  input  logic [NUM_BANKS-1:0][TCDM_DW-1:0]       bank_rdata_i
);
  localparam int unsigned BSEL = $clog2(NUM_BANKS);
  localparam int unsigned RSEL = $clog2(DEPTH);
  localparam int unsigned OFF  = $clog2(TCDM_BW);
  localparam int unsigned MW   = (NUM_MASTERS > 1) ? $clog2(NUM_MASTERS) : 1;

  logic [NUM_MASTERS-1:0][BSEL-1:0] tgt_bank;
  logic [NUM_BANKS-1:0][MW-1:0]     rr_ptr_q, rr_ptr_d;
  logic [NUM_BANKS-1:0]             bank_gnt;
  logic [NUM_BANKS-1:0][MW-1:0]     bank_win;
  logic [NUM_MASTERS-1:0]           rd_q;
  logic [NUM_MASTERS-1:0][BSEL-1:0] rd_bank_q;

  for (genvar m = 0; m < NUM_MASTERS; m++) begin : g_tgt
    assign tgt_bank[m] = req_i[m].addr[OFF +: BSEL];
  end

  // Per-bank arbitration: highest class first, round-robin within the class.
  // One arbiter per bank; a master is granted when it is the winner of the
  // bank it addresses.
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_arb
    always_comb begin
      logic [7:0]  maxc;
      logic        found;
      int unsigned idx;
      maxc        = '0;
      found       = 1'b0;
      bank_win[b] = '0;
      rr_ptr_d[b] = rr_ptr_q[b];
      for (int m = 0; m < NUM_MASTERS; m++)
        if (req_valid_i[m] && tgt_bank[m] == BSEL'(b) && PRIO[m] > maxc) maxc = PRIO[m];
      for (int i = 0; i < NUM_MASTERS; i++) begin
        idx = int'(rr_ptr_q[b]) + i;
        if (idx >= NUM_MASTERS) idx = idx - NUM_MASTERS;
        if (!found && req_valid_i[idx] && tgt_bank[idx] == BSEL'(b) && PRIO[idx] == maxc) begin
          found       = 1'b1;
          bank_win[b] = MW'(idx);
        end
      end
      bank_gnt[b] = found;
      if (found) rr_ptr_d[b] = (int'(bank_win[b]) == NUM_MASTERS - 1) ? '0 : bank_win[b] + 1'b1;
    end
  end

  for (genvar m = 0; m < NUM_MASTERS; m++) begin : g_gnt
    assign req_ready_o[m] = req_valid_i[m] && bank_gnt[tgt_bank[m]] && (bank_win[tgt_bank[m]] == MW'(m));
  end

  // Bank side multiplexers.
  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      bank_req_o[b]   = bank_gnt[b];
      bank_we_o[b]    = req_i[bank_win[b]].we;
      bank_row_o[b]   = req_i[bank_win[b]].addr[OFF+BSEL +: RSEL];
      bank_strb_o[b]  = req_i[bank_win[b]].strb;
      bank_wdata_o[b] = req_i[bank_win[b]].data;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_ptr_q  <= '0;
      rd_q      <= '0;
      rd_bank_q <= '0;
    end else begin
      rr_ptr_q <= rr_ptr_d;
      for (int m = 0; m < NUM_MASTERS; m++) begin
        rd_q[m]      <= req_valid_i[m] && req_ready_o[m] && !req_i[m].we;
        rd_bank_q[m] <= tgt_bank[m];
      end
    end
  end

  for (genvar m = 0; m < NUM_MASTERS; m++) begin : g_rsp
    assign rsp_valid_o[m] = rd_q[m];
    assign rsp_data_o[m]  = bank_rdata_i[rd_bank_q[m]];

    // Valid-ready rule: a request waiting for its grant stays up and unchanged.
    a_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
      req_valid_i[m] && !req_ready_o[m] |=> req_valid_i[m] && $stable(req_i[m]));
  end
endmodule
