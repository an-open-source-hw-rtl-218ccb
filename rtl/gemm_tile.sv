// gemm_tile: the GeMM accelerator as it sits in the cluster. It is the
// CSR buffer, the accelerator and its data streamers, stacked as in the
// cluster's block diagram.
//
// A core programs three streamer channels and the GeMM with CSR writes. It
// then writes START. All four parts start in the same cycle and run on their
// own from then on:
//   channel A : streamer_reader, 8 lanes (512 bit), feeds gemm_accel.a
//   channel B : streamer_reader, 8 lanes (512 bit), feeds gemm_accel.b
//   channel C : streamer_writer, 32 lanes (2048 bit), stores gemm_accel.c
// The tile reports busy to its CSR buffer until all four are done. So a task
// that was preloaded during the current one starts the cycle after it ends.
// CSR map at BASE (register offsets):
//   0..12  channel A: base, bound[0..5], stride[0..5]   (see streamer_agu)
//   13..25 channel B, 26..38 channel C
//   39 K_TILES (8x8x8 steps per output tile), 40 N_OUT (output tiles)
//   41 START, 42 STATUS, 43 PERF (busy cycles)
// TCDM lanes: [7:0] A, [15:8] B, [47:16] C.
// mac_cycles_o counts cycles in which the PE array did a step. With PERF it
// gives the PE utilisation.
module gemm_tile
  import snax_pkg::*;
#(
  parameter logic [CSR_AW-1:0] BASE = snax_pkg::CSR_GEMM_BASE
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          csr_req_valid_i,
  output logic                          csr_req_ready_o,
  input  csr_req_t                      csr_req_i,
  output logic                          csr_rsp_valid_o,
  input  logic                          csr_rsp_ready_i,
  output logic [CSR_DW-1:0]             csr_rsp_data_o,
  output logic      [47:0]              tcdm_req_valid_o,
  input  logic      [47:0]              tcdm_req_ready_i,
  output tcdm_req_t [47:0]              tcdm_req_o,
  input  logic      [15:0]              tcdm_rsp_valid_i,
  input  logic      [15:0][TCDM_DW-1:0] tcdm_rsp_data_i,
  output logic                          busy_o,
  output logic [31:0]                   mac_cycles_o
);
  localparam int unsigned NR = 3 * STREAM_REGS + 2;

  logic [NR-1:0][CSR_DW-1:0] cfg;
  logic start, busy_a, busy_b, busy_c, busy_g;
  logic a_valid, b_valid, ab_ready, c_valid, c_ready;
  logic [GEMM_AB_W-1:0] a_data, b_data;
  logic [GEMM_C_W-1:0]  c_data;

  csr_buffer #(.BASE(BASE), .N_REGS(NR), .DOUBLE_BUFFER(1'b1)) u_csr (
    .clk_i, .rst_ni,
    .req_valid_i(csr_req_valid_i), .req_ready_o(csr_req_ready_o), .req_i(csr_req_i),
    .rsp_valid_o(csr_rsp_valid_o), .rsp_ready_i(csr_rsp_ready_i), .rsp_data_o(csr_rsp_data_o),
    .cfg_o(cfg), .start_o(start), .busy_i(busy_o)
  );

  streamer_reader #(.LANES(8)) u_rd_a (
    .clk_i, .rst_ni, .start_i(start), .cfg_i(regs_to_agu(cfg[0 +: STREAM_REGS])), .busy_o(busy_a),
    .tcdm_req_valid_o(tcdm_req_valid_o[7:0]), .tcdm_req_ready_i(tcdm_req_ready_i[7:0]),
    .tcdm_req_o(tcdm_req_o[7:0]), .tcdm_rsp_valid_i(tcdm_rsp_valid_i[7:0]),
    .tcdm_rsp_data_i(tcdm_rsp_data_i[7:0]),
    .data_valid_o(a_valid), .data_ready_i(ab_ready), .data_o(a_data)
  );

  streamer_reader #(.LANES(8)) u_rd_b (
    .clk_i, .rst_ni, .start_i(start), .cfg_i(regs_to_agu(cfg[STREAM_REGS +: STREAM_REGS])), .busy_o(busy_b),
    .tcdm_req_valid_o(tcdm_req_valid_o[15:8]), .tcdm_req_ready_i(tcdm_req_ready_i[15:8]),
    .tcdm_req_o(tcdm_req_o[15:8]), .tcdm_rsp_valid_i(tcdm_rsp_valid_i[15:8]),
    .tcdm_rsp_data_i(tcdm_rsp_data_i[15:8]),
    .data_valid_o(b_valid), .data_ready_i(ab_ready), .data_o(b_data)
  );

  gemm_accel u_gemm (
    .clk_i, .rst_ni, .start_i(start),
    .k_tiles_i(cfg[3*STREAM_REGS][15:0]), .n_out_i(cfg[3*STREAM_REGS+1]), .busy_o(busy_g),
    .a_valid_i(a_valid), .a_i(a_data), .b_valid_i(b_valid), .b_i(b_data), .ab_ready_o(ab_ready),
    .c_valid_o(c_valid), .c_ready_i(c_ready), .c_o(c_data), .mac_cycles_o
  );

  streamer_writer #(.LANES(32)) u_wr_c (
    .clk_i, .rst_ni, .start_i(start), .cfg_i(regs_to_agu(cfg[2*STREAM_REGS +: STREAM_REGS])), .busy_o(busy_c),
    .data_valid_i(c_valid), .data_ready_o(c_ready), .data_i(c_data),
    .tcdm_req_valid_o(tcdm_req_valid_o[47:16]), .tcdm_req_ready_i(tcdm_req_ready_i[47:16]),
    .tcdm_req_o(tcdm_req_o[47:16])
  );

  assign busy_o = busy_a || busy_b || busy_c || busy_g;
endmodule
