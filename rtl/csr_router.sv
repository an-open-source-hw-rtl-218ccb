// csr_router: address decoder for the CSR port of one management core.
//
// A core can control one or more units (Fig. 6d of the cluster: one core runs
// both the MaxPool accelerator and the DMA). Each unit answers in its own
// CSR window [BASE[t], BASE[t] + SIZE[t]). The router forwards a request to
// the unit whose window holds the address. The handshake stays combinational,
// so the core sees the unit's own ready. A write to an unmapped address is
// accepted and dropped. A read from one returns 0 in the next cycle.
// Responses of the units are merged. The core (like a single-issue RISC-V
// core's blocking CSR read) has at most one read outstanding, so at most one
// response is valid at a time. The windows and the decoding are this
// design's own; the paper only says that each accelerator has unique
// register addresses.
module csr_router
  import snax_pkg::*;
#(
  parameter int unsigned NT = 2,
  parameter logic [NT-1:0][CSR_AW-1:0] BASE = '{default: '0},
  parameter logic [NT-1:0][CSR_AW-1:0] SIZE = '{default: 12'd1}
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // from the core
  input  logic                         req_valid_i,
  output logic                         req_ready_o,
  input  csr_req_t                     req_i,
  output logic                         rsp_valid_o,
  input  logic                         rsp_ready_i,
  output logic [CSR_DW-1:0]            rsp_data_o,
  // to the units
  output logic     [NT-1:0]            t_req_valid_o,
  input  logic     [NT-1:0]            t_req_ready_i,
  output csr_req_t [NT-1:0]            t_req_o,
  input  logic     [NT-1:0]            t_rsp_valid_i,
  output logic     [NT-1:0]            t_rsp_ready_o,
  input  logic     [NT-1:0][CSR_DW-1:0] t_rsp_data_i
);
  logic [NT-1:0] hit;
  logic miss_rsp_q;

  always_comb begin
    for (int t = 0; t < NT; t++)
      hit[t] = (req_i.addr >= BASE[t]) && (req_i.addr < BASE[t] + SIZE[t]);
  end

  always_comb begin
    req_ready_o = (hit == '0) ? (req_i.write || !miss_rsp_q || rsp_ready_i) : 1'b0;
    for (int t = 0; t < NT; t++) begin
      t_req_o[t]       = req_i;
      t_req_valid_o[t] = req_valid_i && hit[t];
      if (hit[t]) req_ready_o = t_req_ready_i[t];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) miss_rsp_q <= 1'b0;
    else if (req_valid_i && req_ready_o && hit == '0 && !req_i.write) miss_rsp_q <= 1'b1;
    else if (rsp_ready_i) miss_rsp_q <= 1'b0;
  end

  always_comb begin
    rsp_valid_o = miss_rsp_q;
    rsp_data_o  = '0;
    for (int t = 0; t < NT; t++) begin
      t_rsp_ready_o[t] = rsp_ready_i;
      if (t_rsp_valid_i[t]) begin
        rsp_valid_o = 1'b1;
        rsp_data_o  = t_rsp_data_i[t];
      end
    end
  end

  a_one_rsp: assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0({t_rsp_valid_i, miss_rsp_q}));
endmodule
