// maxpool_tile: the MaxPool accelerator as it sits in the cluster. It is the
// CSR buffer, maxpool_accel and two 512-bit data streamers.
//
// Channel I (streamer_reader, 8 lanes) walks the input feature map. Its loops
// give the window elements of each output pixel, one after another. Channel O
// (streamer_writer, 8 lanes) stores one 512-bit word of maxima per window.
// CSR map at BASE (register offsets):
//   0..12 channel I: base, bound[0..5], stride[0..5]
//   13..25 channel O, 26 WINDOW (words per window), 27 N_OUT (windows)
//   28 START, 29 STATUS, 30 PERF
// TCDM lanes: [7:0] input reads, [15:8] output writes.
// Like every accelerator here, it is double-buffered and reports busy
// until its writer has drained.
module maxpool_tile
  import snax_pkg::*;
#(
  parameter logic [CSR_AW-1:0] BASE = snax_pkg::CSR_MAXPOOL_BASE
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         csr_req_valid_i,
  output logic                         csr_req_ready_o,
  input  csr_req_t                     csr_req_i,
  output logic                         csr_rsp_valid_o,
  input  logic                         csr_rsp_ready_i,
  output logic [CSR_DW-1:0]            csr_rsp_data_o,
  output logic      [15:0]             tcdm_req_valid_o,
  input  logic      [15:0]             tcdm_req_ready_i,
  output tcdm_req_t [15:0]             tcdm_req_o,
  input  logic      [7:0]              tcdm_rsp_valid_i,
  input  logic      [7:0][TCDM_DW-1:0] tcdm_rsp_data_i,
  output logic                         busy_o
);
  localparam int unsigned NR = 2 * STREAM_REGS + 2;

  logic [NR-1:0][CSR_DW-1:0] cfg;
  logic start, busy_i_s, busy_o_s, busy_m;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [MP_W-1:0] in_data, out_data;

  csr_buffer #(.BASE(BASE), .N_REGS(NR), .DOUBLE_BUFFER(1'b1)) u_csr (
    .clk_i, .rst_ni,
    .req_valid_i(csr_req_valid_i), .req_ready_o(csr_req_ready_o), .req_i(csr_req_i),
    .rsp_valid_o(csr_rsp_valid_o), .rsp_ready_i(csr_rsp_ready_i), .rsp_data_o(csr_rsp_data_o),
    .cfg_o(cfg), .start_o(start), .busy_i(busy_o)
  );

  streamer_reader #(.LANES(8)) u_rd (
    .clk_i, .rst_ni, .start_i(start), .cfg_i(regs_to_agu(cfg[0 +: STREAM_REGS])), .busy_o(busy_i_s),
    .tcdm_req_valid_o(tcdm_req_valid_o[7:0]), .tcdm_req_ready_i(tcdm_req_ready_i[7:0]),
    .tcdm_req_o(tcdm_req_o[7:0]), .tcdm_rsp_valid_i(tcdm_rsp_valid_i),
    .tcdm_rsp_data_i(tcdm_rsp_data_i),
    .data_valid_o(in_valid), .data_ready_i(in_ready), .data_o(in_data)
  );

  maxpool_accel #(.N_KERNELS(MP_KERNELS), .LANES_PER_KERNEL(MP_W / (MP_KERNELS * 8))) u_mp (
    .clk_i, .rst_ni, .start_i(start),
    .win_i(cfg[2*STREAM_REGS][7:0]), .n_out_i(cfg[2*STREAM_REGS+1]), .busy_o(busy_m),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_i(in_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_o(out_data)
  );

  streamer_writer #(.LANES(8)) u_wr (
    .clk_i, .rst_ni, .start_i(start), .cfg_i(regs_to_agu(cfg[STREAM_REGS +: STREAM_REGS])), .busy_o(busy_o_s),
    .data_valid_i(out_valid), .data_ready_o(out_ready), .data_i(out_data),
    .tcdm_req_valid_o(tcdm_req_valid_o[15:8]), .tcdm_req_ready_i(tcdm_req_ready_i[15:8]),
    .tcdm_req_o(tcdm_req_o[15:8])
  );

  assign busy_o = busy_i_s || busy_o_s || busy_m;
endmodule
