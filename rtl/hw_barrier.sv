// hw_barrier: the cluster's hardware barrier, a register fence set with a
// CSR write.
//
// Each management core has a one-register CSR port. A core arrives at the
// barrier by writing the barrier register. That write is held (req_ready_o
// low) until every core has arrived and every unit has gone idle: the
// accelerators and the DMA report unit_busy_i. Then all the held writes are
// accepted in the same cycle, and the cores go on together. The compiler puts
// such barriers between the stages of a pipelined schedule. After a barrier
// the data that one stage produced is in the scratchpad, ready for the next.
// The paper says only that the barrier synchronises cores, accelerators and
// the DMA with a CSR-set fence. Waiting for all units to be idle is this
// design's way of doing that. A read of the register returns the arrival mask
// (bits N_CORES-1:0) and the unit busy flags (bits 8 +: N_UNITS), one cycle
// later. `releases_o` counts completed barriers.
module hw_barrier
  import snax_pkg::*;
#(
  parameter int unsigned N_CORES = 3,
  parameter int unsigned N_UNITS = 3
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  input  logic     [N_CORES-1:0]           req_valid_i,
  output logic     [N_CORES-1:0]           req_ready_o,
  input  csr_req_t [N_CORES-1:0]           req_i,
  output logic     [N_CORES-1:0]           rsp_valid_o,
  input  logic     [N_CORES-1:0]           rsp_ready_i,
  output logic     [N_CORES-1:0][CSR_DW-1:0] rsp_data_o,
  input  logic     [N_UNITS-1:0]           unit_busy_i,
  output logic     [31:0]                  releases_o
);
  logic [N_CORES-1:0] arrive;
  logic               release_all;
  logic [N_CORES-1:0] rsp_q;
  logic [31:0]        rel_q;

  for (genvar c = 0; c < N_CORES; c++) begin : g_arr
    assign arrive[c] = req_valid_i[c] && req_i[c].write;
  end
  assign release_all = (&arrive) && (unit_busy_i == '0);

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    assign req_ready_o[c] = req_i[c].write ? release_all : (!rsp_q[c] || rsp_ready_i[c]);
    assign rsp_valid_o[c] = rsp_q[c];
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        rsp_q[c]      <= 1'b0;
        rsp_data_o[c] <= '0;
      end else if (req_valid_i[c] && req_ready_o[c] && !req_i[c].write) begin
        rsp_q[c]      <= 1'b1;
        rsp_data_o[c] <= CSR_DW'({unit_busy_i, 8'(arrive)});
      end else if (rsp_ready_i[c]) begin
        rsp_q[c] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rel_q <= '0;
    else if (release_all) rel_q <= rel_q + 1'b1;
  end
  assign releases_o = rel_q;
endmodule
