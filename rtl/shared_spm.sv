// shared_spm: the shared multi-banked L1 scratchpad of the cluster.
//
// NUM_BANKS independent spm_bank instances, one port each. They are
// addressed by row: the TCDM interconnect has already picked the bank from the
// low address bits, so all banks can be accessed in the same cycle. The
// default is 32 banks x 512 rows x 8 bytes = 128 kB, the memory size the paper
// gives for the cluster. The bank count and width are this design's own
// choice. Read data arrives one cycle after the request.
module shared_spm #(
  parameter int unsigned NUM_BANKS = snax_pkg::NUM_BANKS,
  parameter int unsigned DEPTH     = snax_pkg::BANK_DEPTH,
  parameter int unsigned DW        = snax_pkg::TCDM_DW
) (
  input  logic                                     clk_i,
  input  logic [NUM_BANKS-1:0]                     req_i,
  input  logic [NUM_BANKS-1:0]                     we_i,
  input  logic [NUM_BANKS-1:0][$clog2(DEPTH)-1:0]  row_i,
  input  logic [NUM_BANKS-1:0][DW/8-1:0]           strb_i,
  input  logic [NUM_BANKS-1:0][DW-1:0]             wdata_i,
  output logic [NUM_BANKS-1:0][DW-1:0]             rdata_o
);
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    spm_bank #(.DW(DW), .DEPTH(DEPTH)) u_bank (
      .clk_i, .req_i(req_i[b]), .we_i(we_i[b]), .addr_i(row_i[b]),
      .strb_i(strb_i[b]), .wdata_i(wdata_i[b]), .rdata_o(rdata_o[b])
    );
  end
endmodule
