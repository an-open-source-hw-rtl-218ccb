// streamer_reader: read side of a data streamer. It turns a nested-loop
// address pattern into a continuous wide data stream for an accelerator.
//
// A wide port of LANES x 64 bits (8 lanes = 512 bit) is split into LANES
// independent 64-bit TCDM ports. For every address from the streamer_agu,
// lane l reads the word at address + 8*l. Each lane sends its request as
// soon as it has room: its FIFO fill level plus the read in flight must be
// below FIFO_DEPTH. The agu moves on only when every lane has been granted
// for the current address. A lane that lost a bank conflict retries. The
// lanes already served wait. Read data (one cycle after the grant) goes into
// the lane's FIFO. The wide output word is valid when every lane FIFO holds
// data, and all lanes pop together. With no bank conflicts the streamer gives
// one wide word per cycle. The FIFOs ride out short conflicts without
// starving the accelerator, as the paper describes. The lane split and the
// contiguous lane addresses are this design's own.
//
// Interface: start_i with cfg_i begins a stream. busy_o stays high until the
// last word has left the output.
module streamer_reader
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
  // TCDM lanes
  output logic      [LANES-1:0]         tcdm_req_valid_o,
  input  logic      [LANES-1:0]         tcdm_req_ready_i,
  output tcdm_req_t [LANES-1:0]         tcdm_req_o,
  input  logic      [LANES-1:0]         tcdm_rsp_valid_i,
  input  logic      [LANES-1:0][TCDM_DW-1:0] tcdm_rsp_data_i,
  // wide stream to the accelerator
  output logic                          data_valid_o,
  input  logic                          data_ready_i,
  output logic [LANES*TCDM_DW-1:0]      data_o
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic agu_valid, agu_ready, agu_busy;
  tcdm_addr_t agu_addr;
  logic [LANES-1:0] done_q, inflight_q, lane_ok, fifo_valid, fifo_room;
  logic [LANES-1:0][CW-1:0] fifo_cnt;
  logic pop;

  streamer_agu u_agu (
    .clk_i, .rst_ni, .start_i, .cfg_i,
    .valid_o(agu_valid), .ready_i(agu_ready), .addr_o(agu_addr), .busy_o(agu_busy)
  );

  assign pop = data_valid_o && data_ready_i;
  assign data_valid_o = &fifo_valid;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    assign tcdm_req_valid_o[l] = agu_valid && !done_q[l] &&
                                 ((32'(fifo_cnt[l]) + 32'(inflight_q[l])) < FIFO_DEPTH);
    assign tcdm_req_o[l] = '{addr: agu_addr + TCDM_AW'(l * TCDM_BW), we: 1'b0, strb: '0, data: '0};
    assign lane_ok[l] = done_q[l] || (tcdm_req_valid_o[l] && tcdm_req_ready_i[l]);

    sync_fifo #(.WIDTH(TCDM_DW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk_i, .rst_ni,
      .push_valid_i(tcdm_rsp_valid_i[l]), .push_ready_o(fifo_room[l]), .push_data_i(tcdm_rsp_data_i[l]),
      .pop_valid_o(fifo_valid[l]), .pop_ready_i(pop), .pop_data_o(data_o[l*TCDM_DW +: TCDM_DW]),
      .count_o(fifo_cnt[l])
    );

    // The credit rule above reserves a FIFO slot for every read in flight.
    a_room: assert property (@(posedge clk_i) disable iff (!rst_ni)
      tcdm_rsp_valid_i[l] |-> fifo_room[l]);
  end

  assign agu_ready = agu_valid && (&lane_ok);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      done_q     <= '0;
      inflight_q <= '0;
    end else begin
      inflight_q <= tcdm_req_valid_o & tcdm_req_ready_i;
      if (agu_ready) done_q <= '0;
      else           done_q <= done_q | (tcdm_req_valid_o & tcdm_req_ready_i);
    end
  end

  assign busy_o = agu_busy || (inflight_q != '0) || (|fifo_valid);
endmodule
