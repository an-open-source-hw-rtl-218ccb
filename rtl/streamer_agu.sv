// streamer_agu: the hardware-loop address generator of a data streamer.
//
// It walks DIMS nested loops and produces one byte address per step:
//   addr = base + sum over d of idx[d] * stride[d],   0 <= idx[d] < bound[d]
// Loop 0 is the innermost. A bound of 0 counts as 1. The loop bounds and
// strides are set at run time through the accelerator's CSRs. The number of
// loops is fixed at design time. This is how an accelerator's access pattern
// (a tiled matrix or a sliding window) is described once, as for-loops, and
// then replayed by hardware with no core involved. The paper asks for nested
// hardware loops; the address formula and DIMS = 6 are this design's own.
//
// Interface: start_i (one cycle) loads cfg_i and begins the walk. addr_o is
// offered with valid_o and moves on in each cycle that ready_i is high.
// busy_o is high from the cycle after start_i until the last address has been
// taken. One address per cycle at most.
module streamer_agu
  import snax_pkg::*;
#(
  parameter int unsigned DIMS = snax_pkg::STREAM_DIMS
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       start_i,
  input  agu_cfg_t   cfg_i,
  output logic       valid_o,
  input  logic       ready_i,
  output tcdm_addr_t addr_o,
  output logic       busy_o
);
  agu_cfg_t cfg_q;
  logic [DIMS-1:0][15:0] idx_q;
  logic active_q;

  always_comb begin
    addr_o = cfg_q.base;
    for (int d = 0; d < DIMS; d++)
      addr_o = addr_o + TCDM_AW'(idx_q[d] * cfg_q.stride[d]);
  end

  assign valid_o = active_q;
  assign busy_o  = active_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q    <= '0;
      idx_q    <= '0;
      active_q <= 1'b0;
    end else if (start_i) begin
      cfg_q    <= cfg_i;
      idx_q    <= '0;
      active_q <= 1'b1;
    end else if (active_q && ready_i) begin
      logic carry;
      carry = 1'b1;
      for (int d = 0; d < DIMS; d++) begin
        if (carry) begin
          if (idx_q[d] + 1 >= ((cfg_q.bound[d] == 0) ? 16'd1 : cfg_q.bound[d])) begin
            idx_q[d] <= '0;
          end else begin
            idx_q[d] <= idx_q[d] + 1'b1;
            carry = 1'b0;
          end
        end
      end
      if (carry) active_q <= 1'b0;   // every loop wrapped: walk complete
    end
  end
endmodule
