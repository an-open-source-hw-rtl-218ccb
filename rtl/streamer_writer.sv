// streamer_writer: write side of a data streamer. It stores an
// accelerator's wide output stream at the addresses of a nested-loop
// pattern.
//
// A wide word is taken from the accelerator when the agu has an address and
// every lane FIFO has room. Lane l of the word is queued together with its
// address (agu address + 8*l) in that lane's FIFO. Each lane then drains its
// own FIFO to the TCDM, one 64-bit write per grant. Lanes that lose bank
// conflicts fall behind for a while without stalling the others or the
// accelerator, until their FIFO fills. With no conflicts one wide word is
// written per cycle. It follows the paper's description of streamers
// (address generation plus FIFOs). The lane split is this design's own.
//
// Interface: start_i with cfg_i opens a stream. busy_o stays high until the
// agu has finished and every queued write has been granted.
module streamer_writer
  import snax_pkg::*;
#(
  parameter int unsigned LANES      = 8,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          start_i,
  input  agu_cfg_t                      cfg_i,
  output logic                          busy_o,
  // wide stream from the accelerator
  input  logic                          data_valid_i,
  output logic                          data_ready_o,
  input  logic [LANES*TCDM_DW-1:0]      data_i,
  // TCDM lanes
  output logic      [LANES-1:0]         tcdm_req_valid_o,
  input  logic      [LANES-1:0]         tcdm_req_ready_i,
  output tcdm_req_t [LANES-1:0]         tcdm_req_o
);
  localparam int unsigned EW = TCDM_AW + TCDM_DW;

  logic agu_valid, agu_busy, push;
  tcdm_addr_t agu_addr;
  logic [LANES-1:0] space, fifo_valid;
  logic [LANES-1:0][EW-1:0] fifo_out;

  streamer_agu u_agu (
    .clk_i, .rst_ni, .start_i, .cfg_i,
    .valid_o(agu_valid), .ready_i(push), .addr_o(agu_addr), .busy_o(agu_busy)
  );

  assign data_ready_o = agu_valid && (&space);
  assign push = data_valid_i && data_ready_o;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    sync_fifo #(.WIDTH(EW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk_i, .rst_ni,
      .push_valid_i(push), .push_ready_o(space[l]),
      .push_data_i({agu_addr + TCDM_AW'(l * TCDM_BW), data_i[l*TCDM_DW +: TCDM_DW]}),
      .pop_valid_o(fifo_valid[l]), .pop_ready_i(tcdm_req_ready_i[l]), .pop_data_o(fifo_out[l]),
      .count_o()
    );
    assign tcdm_req_valid_o[l] = fifo_valid[l];
    assign tcdm_req_o[l] = '{addr: fifo_out[l][TCDM_DW +: TCDM_AW], we: 1'b1, strb: '1,
                             data: fifo_out[l][TCDM_DW-1:0]};
  end

  assign busy_o = agu_busy || (|fifo_valid);
endmodule
