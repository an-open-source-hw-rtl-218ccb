// csr_buffer: the control port of one accelerator. It holds double-buffered
// configuration registers behind a valid-ready CSR interface.
//
// A management core programs an accelerator with plain CSR writes and reads
// (fire-and-forget). The registers come in two sets. The core writes the
// shadow set. The accelerator reads the active set (cfg_o). A write to the
// START register marks the shadow set as pending. As soon as the unit is idle
// (busy_i low), the pending set is copied into the active set and start_o
// pulses for one cycle. So the core can load task n+1 while the accelerator
// still runs task n, and the setup time of the registers is hidden. The
// double buffering follows the paper; the register map and the stall rules
// are this design's own:
//   BASE + i, i < N_REGS : configuration register i (read back: shadow value)
//   BASE + N_REGS        : START (write any value)
//   BASE + N_REGS + 1    : STATUS, bit0 = busy (running or launching), bit1 = pending
//   BASE + N_REGS + 2    : PERF, cycles the unit has been busy since reset
// While a set is pending, further configuration writes and START are stalled
// (req_ready_o low), so a waiting set is never overwritten.
// With DOUBLE_BUFFER = 0 there is only one set. Writes then stall while the
// unit is busy, and cfg_o shows the written registers directly.
//
// Timing: a write is taken in the cycle valid and ready are both high. START
// is taken in cycle t. The earliest launch copies the set at the end of cycle
// t+1, and start_o is high in cycle t+2. A read returns its data through a
// one-entry response register, the cycle after it is taken.
module csr_buffer
  import snax_pkg::*;
#(
  parameter logic [CSR_AW-1:0] BASE          = 12'h3C0,
  parameter int unsigned       N_REGS        = 8,
  parameter bit                DOUBLE_BUFFER = 1'b1
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic                           req_valid_i,
  output logic                           req_ready_o,
  input  csr_req_t                       req_i,
  output logic                           rsp_valid_o,
  input  logic                           rsp_ready_i,
  output logic [CSR_DW-1:0]              rsp_data_o,
  output logic [N_REGS-1:0][CSR_DW-1:0]  cfg_o,
  output logic                           start_o,
  input  logic                           busy_i
);
  localparam int unsigned OW = $clog2(N_REGS + 3);

  logic [N_REGS-1:0][CSR_DW-1:0] shadow_q, active_q;
  logic pending_q, start_q, rsp_valid_q;
  logic [CSR_DW-1:0] rsp_data_q, perf_q;
  logic [CSR_AW-1:0] off;
  logic is_cfg, is_start, can_write, launch;

  assign off      = req_i.addr - BASE;
  assign is_cfg   = (off < CSR_AW'(N_REGS));
  assign is_start = (off == CSR_AW'(N_REGS));
  assign can_write = DOUBLE_BUFFER ? !pending_q : (!pending_q && !busy_i && !start_q);
  assign launch   = pending_q && !busy_i && !start_q;

  always_comb begin
    if (!req_i.write)                req_ready_o = !rsp_valid_q || rsp_ready_i;
    else if (is_cfg || is_start)     req_ready_o = can_write;
    else                             req_ready_o = 1'b1;   // writes to read-only regs are dropped
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      shadow_q    <= '0;
      active_q    <= '0;
      pending_q   <= 1'b0;
      start_q     <= 1'b0;
      rsp_valid_q <= 1'b0;
      rsp_data_q  <= '0;
      perf_q      <= '0;
    end else begin
      start_q <= launch;
      if (launch) begin
        active_q  <= shadow_q;
        pending_q <= 1'b0;
      end
      if (busy_i) perf_q <= perf_q + 1'b1;
      if (rsp_valid_q && rsp_ready_i) rsp_valid_q <= 1'b0;
      if (req_valid_i && req_ready_o) begin
        if (req_i.write) begin
          if (is_cfg)   shadow_q[off[OW-1:0]] <= req_i.data;
          if (is_start) pending_q <= 1'b1;
        end else begin
          rsp_valid_q <= 1'b1;
          if (is_cfg)                              rsp_data_q <= shadow_q[off[OW-1:0]];
          else if (off == CSR_AW'(N_REGS + 1))     rsp_data_q <= {30'd0, pending_q, busy_i | start_q};
          else if (off == CSR_AW'(N_REGS + 2))     rsp_data_q <= perf_q;
          else                                     rsp_data_q <= '0;
        end
      end
    end
  end

  assign cfg_o       = DOUBLE_BUFFER ? active_q : shadow_q;
  assign start_o     = start_q;
  assign rsp_valid_o = rsp_valid_q;
  assign rsp_data_o  = rsp_data_q;

  // A new task is never launched on a busy unit.
  a_no_start_busy: assert property (@(posedge clk_i) disable iff (!rst_ni) start_o |-> !busy_i);
endmodule
