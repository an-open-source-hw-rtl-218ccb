// dma_engine: the cluster's 2D DMA. It moves 512-bit beats between the AXI
// bus (external memory) and the shared scratchpad.
//
// A transfer is `reps` rows of `row_beats` 64-byte beats. Row r is read from
// src + r*src_stride and written to dst + r*dst_stride. So the source and the
// destination each have their own stride, which gives 2D transfers.
//   dir = 0 (AXI -> SPM): one AXI read burst per row is issued on AR, as
//     early as AR is ready. R beats go into a streamer_writer whose two loops
//     are (row_beats, 64) and (reps, dst_stride).
//   dir = 1 (SPM -> AXI): one AXI write burst per row is announced on AW. A
//     streamer_reader with loops (row_beats, 64) and (reps, src_stride)
//     reads the scratchpad, and its beats go out on W. WLAST closes each
//     row. The transfer ends when every B response is back.
// Both directions reach one 512-bit beat per cycle when neither the bus nor
// the banks stall. The DMA reuses the streamer blocks for its scratchpad side
// (8 lanes of 64 bit). The paper gives the 512-bit width and the two strides;
// the register map, one burst per row and the AXI subset below are this
// design's own. Bursts are INCR, at most 256 beats, and addresses are 64-byte
// aligned.
// Fig. 4 of the cluster draws no CSR buffer on the DMA, so its registers are
// single-buffered: writes wait while a transfer runs.
// CSR map at BASE: 0 SRC, 1 DST, 2 ROW_BEATS, 3 SRC_STRIDE, 4 DST_STRIDE,
// 5 REPS, 6 DIR, 7 START, 8 STATUS, 9 PERF.
module dma_engine
  import snax_pkg::*;
#(
  parameter logic [CSR_AW-1:0] BASE   = snax_pkg::CSR_DMA_BASE,
  parameter int unsigned       AXI_AW = 32,
  parameter int unsigned       DW     = snax_pkg::DMA_DW
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // CSR port
  input  logic                         csr_req_valid_i,
  output logic                         csr_req_ready_o,
  input  csr_req_t                     csr_req_i,
  output logic                         csr_rsp_valid_o,
  input  logic                         csr_rsp_ready_i,
  output logic [CSR_DW-1:0]            csr_rsp_data_o,
  // AXI master (subset: INCR bursts, full-width beats)
  output logic                         ar_valid_o,
  input  logic                         ar_ready_i,
  output logic [AXI_AW-1:0]            ar_addr_o,
  output logic [7:0]                   ar_len_o,
  input  logic                         r_valid_i,
  output logic                         r_ready_o,
  input  logic [DW-1:0]                r_data_i,
  input  logic                         r_last_i,
  output logic                         aw_valid_o,
  input  logic                         aw_ready_i,
  output logic [AXI_AW-1:0]            aw_addr_o,
  output logic [7:0]                   aw_len_o,
  output logic                         w_valid_o,
  input  logic                         w_ready_i,
  output logic [DW-1:0]                w_data_o,
  output logic [DW/8-1:0]              w_strb_o,
  output logic                         w_last_o,
  input  logic                         b_valid_i,
  output logic                         b_ready_o,
  // TCDM lanes
  output logic      [DW/TCDM_DW-1:0]              tcdm_req_valid_o,
  input  logic      [DW/TCDM_DW-1:0]              tcdm_req_ready_i,
  output tcdm_req_t [DW/TCDM_DW-1:0]              tcdm_req_o,
  input  logic      [DW/TCDM_DW-1:0]              tcdm_rsp_valid_i,
  input  logic      [DW/TCDM_DW-1:0][TCDM_DW-1:0] tcdm_rsp_data_i,
  output logic                         busy_o
);
  localparam int unsigned LANES = DW / TCDM_DW;
  localparam int unsigned BEAT  = DW / 8;

  logic [6:0][CSR_DW-1:0] cfg;
  logic start, busy_q, dir_q;
  logic [31:0] rows_issued_q, beats_seen_q, bresp_q, total_beats, reps, row_beats;
  logic [7:0]  wbeat_q;
  agu_cfg_t    rd_cfg, wr_cfg;
  logic rd_busy, wr_busy, rd_valid, wr_ready;
  logic [LANES-1:0] rd_req_valid, wr_req_valid;
  tcdm_req_t [LANES-1:0] rd_req, wr_req;
  logic [DW-1:0] rd_data;
  logic addr_fire, done;

  csr_buffer #(.BASE(BASE), .N_REGS(7), .DOUBLE_BUFFER(1'b0)) u_csr (
    .clk_i, .rst_ni,
    .req_valid_i(csr_req_valid_i), .req_ready_o(csr_req_ready_o), .req_i(csr_req_i),
    .rsp_valid_o(csr_rsp_valid_o), .rsp_ready_i(csr_rsp_ready_i), .rsp_data_o(csr_rsp_data_o),
    .cfg_o(cfg), .start_o(start), .busy_i(busy_o)
  );

  assign row_beats   = (cfg[2] == 0) ? 32'd1 : cfg[2];
  assign reps        = (cfg[5] == 0) ? 32'd1 : cfg[5];
  assign total_beats = row_beats * reps;

  // Scratchpad-side loop nests: (row_beats, 64 B) inside (reps, stride).
  always_comb begin
    rd_cfg = '0;
    rd_cfg.base      = TCDM_AW'(cfg[0]);
    rd_cfg.bound[0]  = row_beats[15:0];
    rd_cfg.stride[0] = TCDM_AW'(BEAT);
    rd_cfg.bound[1]  = reps[15:0];
    rd_cfg.stride[1] = TCDM_AW'(cfg[3]);
    wr_cfg = '0;
    wr_cfg.base      = TCDM_AW'(cfg[1]);
    wr_cfg.bound[0]  = row_beats[15:0];
    wr_cfg.stride[0] = TCDM_AW'(BEAT);
    wr_cfg.bound[1]  = reps[15:0];
    wr_cfg.stride[1] = TCDM_AW'(cfg[4]);
  end

  streamer_reader #(.LANES(LANES)) u_rd (
    .clk_i, .rst_ni, .start_i(start && cfg[6][0]), .cfg_i(rd_cfg), .busy_o(rd_busy),
    .tcdm_req_valid_o(rd_req_valid), .tcdm_req_ready_i(tcdm_req_ready_i), .tcdm_req_o(rd_req),
    .tcdm_rsp_valid_i, .tcdm_rsp_data_i,
    .data_valid_o(rd_valid), .data_ready_i(w_ready_i), .data_o(rd_data)
  );

  streamer_writer #(.LANES(LANES)) u_wr (
    .clk_i, .rst_ni, .start_i(start && !cfg[6][0]), .cfg_i(wr_cfg), .busy_o(wr_busy),
    .data_valid_i(r_valid_i && busy_q && !dir_q), .data_ready_o(wr_ready), .data_i(r_data_i),
    .tcdm_req_valid_o(wr_req_valid), .tcdm_req_ready_i(tcdm_req_ready_i), .tcdm_req_o(wr_req)
  );

  assign tcdm_req_valid_o = dir_q ? rd_req_valid : wr_req_valid;
  assign tcdm_req_o       = dir_q ? rd_req : wr_req;

  // AXI address channels: one burst per row.
  assign ar_valid_o = busy_q && !dir_q && (rows_issued_q < reps);
  assign aw_valid_o = busy_q &&  dir_q && (rows_issued_q < reps);
  assign ar_addr_o  = cfg[0] + rows_issued_q * cfg[3];
  assign aw_addr_o  = cfg[1] + rows_issued_q * cfg[4];
  assign ar_len_o   = 8'(row_beats - 1);
  assign aw_len_o   = 8'(row_beats - 1);
  assign addr_fire  = (ar_valid_o && ar_ready_i) || (aw_valid_o && aw_ready_i);

  // Data channels.
  assign r_ready_o = busy_q && !dir_q && wr_ready;
  assign w_valid_o = busy_q && dir_q && rd_valid;
  assign w_data_o  = rd_data;
  assign w_strb_o  = '1;
  assign w_last_o  = (32'(wbeat_q) == row_beats - 1);
  assign b_ready_o = busy_q && dir_q;

  assign done = dir_q ? (bresp_q == reps && !rd_busy)
                      : (beats_seen_q == total_beats && !wr_busy && !start);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q        <= 1'b0;
      dir_q         <= 1'b0;
      rows_issued_q <= '0;
      beats_seen_q  <= '0;
      bresp_q       <= '0;
      wbeat_q       <= '0;
    end else if (start) begin
      busy_q        <= 1'b1;
      dir_q         <= cfg[6][0];
      rows_issued_q <= '0;
      beats_seen_q  <= '0;
      bresp_q       <= '0;
      wbeat_q       <= '0;
    end else if (busy_q) begin
      if (addr_fire) rows_issued_q <= rows_issued_q + 1'b1;
      if (r_valid_i && r_ready_o) beats_seen_q <= beats_seen_q + 1'b1;
      if (w_valid_o && w_ready_i) wbeat_q <= w_last_o ? '0 : wbeat_q + 1'b1;
      if (b_valid_i && b_ready_o) bresp_q <= bresp_q + 1'b1;
      if (done) busy_q <= 1'b0;
    end
  end

  assign busy_o = busy_q;

  // Each AXI read burst must end on the row's last beat.
  a_rlast: assert property (@(posedge clk_i) disable iff (!rst_ni)
    r_valid_i && r_ready_o |-> (r_last_i == ((beats_seen_q + 1) % row_beats == 0)));
endmodule
