// snax_cluster: the SNAX multi-accelerator compute cluster in its
// GeMM + MaxPool configuration. It has three management cores, a GeMM and a
// MaxPool accelerator with data streamers, a 2D DMA, a hardware barrier and
// a 128 kB shared scratchpad.
//
// Control is loosely coupled. Each RISC-V management core (outside this
// module; its ports are core_*) reaches the units it manages through
// CSR accesses:
//   core 0 : barrier only (it runs the layers no accelerator supports)
//   core 1 : GeMM tile, barrier
//   core 2 : MaxPool tile, DMA, barrier
// A core writes a task's registers and START, then goes on; the units run
// asynchronously. Double-buffered CSRs let the next task be loaded while the
// current one runs.
//
// Data is tightly coupled. Every data port is split into 64-bit words, and
// all of them reach all 32 banks through one crossbar with 1-cycle access:
//   masters  0..2   core load/store ports           (class 1)
//            3..10  GeMM A reader, 512 bit          (class 8)
//           11..18  GeMM B reader, 512 bit          (class 8)
//           19..50  GeMM C writer, 2048 bit         (class 32)
//           51..58  MaxPool reader, 512 bit         (class 8)
//           59..66  MaxPool writer, 512 bit         (class 8)
//           67..74  DMA, 512 bit                    (class 8)
// On a bank conflict the higher class wins. Equal classes take turns.
// Producer and consumer accelerators hand data over through the scratchpad,
// and no copies are needed. The DMA's AXI master port (axi_*) goes to the
// external memory system.
//
// Outputs for observation: unit busy flags, barrier releases and the GeMM's
// PE-step count.
//
// Some outputs are constant by design: the DMA only writes full 64-byte
// beats, so axi_w_strb_o is all ones, and the upper bits of CSR read data
// from the barrier are zero. The read-response lanes of the write-only
// streamer ports (GeMM C, MaxPool output) are left unused.
module snax_cluster
  import snax_pkg::*;
#(
  parameter int unsigned N_CORES = 3
) (
  input  logic                               clk_i,
  input  logic                               rst_ni,
  // management cores: CSR ports
  input  logic     [N_CORES-1:0]             core_csr_req_valid_i,
  output logic     [N_CORES-1:0]             core_csr_req_ready_o,
  input  csr_req_t [N_CORES-1:0]             core_csr_req_i,
  output logic     [N_CORES-1:0]             core_csr_rsp_valid_o,
  input  logic     [N_CORES-1:0]             core_csr_rsp_ready_i,
  output logic     [N_CORES-1:0][CSR_DW-1:0] core_csr_rsp_data_o,
  // management cores: data ports
  input  logic      [N_CORES-1:0]              core_tcdm_req_valid_i,
  output logic      [N_CORES-1:0]              core_tcdm_req_ready_o,
  input  tcdm_req_t [N_CORES-1:0]              core_tcdm_req_i,
  output logic      [N_CORES-1:0]              core_tcdm_rsp_valid_o,
  output logic      [N_CORES-1:0][TCDM_DW-1:0] core_tcdm_rsp_data_o,
  // DMA AXI master
  output logic                    axi_ar_valid_o,
  input  logic                    axi_ar_ready_i,
  output logic [31:0]             axi_ar_addr_o,
  output logic [7:0]              axi_ar_len_o,
  input  logic                    axi_r_valid_i,
  output logic                    axi_r_ready_o,
  input  logic [DMA_DW-1:0]       axi_r_data_i,
  input  logic                    axi_r_last_i,
  output logic                    axi_aw_valid_o,
  input  logic                    axi_aw_ready_i,
  output logic [31:0]             axi_aw_addr_o,
  output logic [7:0]              axi_aw_len_o,
  output logic                    axi_w_valid_o,
  input  logic                    axi_w_ready_i,
  output logic [DMA_DW-1:0]       axi_w_data_o,
  output logic [DMA_DW/8-1:0]     axi_w_strb_o,
  output logic                    axi_w_last_o,
  input  logic                    axi_b_valid_i,
  output logic                    axi_b_ready_o,
  // observation
  output logic [2:0]              unit_busy_o,       // {dma, maxpool, gemm}
  output logic [31:0]             barrier_releases_o,
  output logic [31:0]             gemm_mac_cycles_o
);
  localparam int unsigned NM = N_CORES + 72;
  localparam int unsigned M_GEMM = N_CORES;
  localparam int unsigned M_MP   = N_CORES + 48;
  localparam int unsigned M_DMA  = N_CORES + 64;

  function automatic logic [NM-1:0][7:0] prio_map();
    logic [NM-1:0][7:0] p;
    for (int m = 0; m < NM; m++) begin
      if (m < N_CORES)                          p[m] = 8'd1;
      else if (m >= M_GEMM + 16 && m < M_MP)    p[m] = 8'd32;
      else                                      p[m] = 8'd8;
    end
    return p;
  endfunction

  // ---------------- TCDM crossbar and scratchpad ----------------
  logic      [NM-1:0]              m_valid, m_ready, m_rvalid;
  tcdm_req_t [NM-1:0]              m_req;
  logic      [NM-1:0][TCDM_DW-1:0] m_rdata;
  logic [NUM_BANKS-1:0] b_req, b_we;
  logic [NUM_BANKS-1:0][$clog2(BANK_DEPTH)-1:0] b_row;
  logic [NUM_BANKS-1:0][TCDM_BW-1:0] b_strb;
  logic [NUM_BANKS-1:0][TCDM_DW-1:0] b_wdata, b_rdata;

  tcdm_interconnect #(.NUM_MASTERS(NM), .PRIO(prio_map())) u_xbar (
    .clk_i, .rst_ni,
    .req_valid_i(m_valid), .req_ready_o(m_ready), .req_i(m_req),
    .rsp_valid_o(m_rvalid), .rsp_data_o(m_rdata),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_row_o(b_row), .bank_strb_o(b_strb),
    .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata)
  );

  shared_spm u_spm (
    .clk_i, .req_i(b_req), .we_i(b_we), .row_i(b_row), .strb_i(b_strb),
    .wdata_i(b_wdata), .rdata_o(b_rdata)
  );

  assign m_valid[N_CORES-1:0]  = core_tcdm_req_valid_i;
  assign m_req[N_CORES-1:0]    = core_tcdm_req_i;
  assign core_tcdm_req_ready_o = m_ready[N_CORES-1:0];
  assign core_tcdm_rsp_valid_o = m_rvalid[N_CORES-1:0];
  assign core_tcdm_rsp_data_o  = m_rdata[N_CORES-1:0];

  // ---------------- CSR routing ----------------
  // Unit ports: 0 gemm, 1 maxpool, 2 dma.
  logic     [2:0]             u_valid, u_ready, u_rvalid, u_rready;
  csr_req_t [2:0]             u_req;
  logic     [2:0][CSR_DW-1:0] u_rdata;
  logic     [N_CORES-1:0]             bar_valid, bar_ready, bar_rvalid, bar_rready;
  csr_req_t [N_CORES-1:0]             bar_req;
  logic     [N_CORES-1:0][CSR_DW-1:0] bar_rdata;

  for (genvar c = 3; c < N_CORES; c++) begin : g_extra_core
    // Further cores only see the barrier.
    csr_router #(.NT(1), .BASE({CSR_BARRIER}), .SIZE({12'd1})) u_rt (
      .clk_i, .rst_ni,
      .req_valid_i(core_csr_req_valid_i[c]), .req_ready_o(core_csr_req_ready_o[c]), .req_i(core_csr_req_i[c]),
      .rsp_valid_o(core_csr_rsp_valid_o[c]), .rsp_ready_i(core_csr_rsp_ready_i[c]), .rsp_data_o(core_csr_rsp_data_o[c]),
      .t_req_valid_o(bar_valid[c]), .t_req_ready_i(bar_ready[c]), .t_req_o(bar_req[c]),
      .t_rsp_valid_i(bar_rvalid[c]), .t_rsp_ready_o(bar_rready[c]), .t_rsp_data_i(bar_rdata[c])
    );
  end

  csr_router #(.NT(1), .BASE({CSR_BARRIER}), .SIZE({12'd1})) u_rt0 (
    .clk_i, .rst_ni,
    .req_valid_i(core_csr_req_valid_i[0]), .req_ready_o(core_csr_req_ready_o[0]), .req_i(core_csr_req_i[0]),
    .rsp_valid_o(core_csr_rsp_valid_o[0]), .rsp_ready_i(core_csr_rsp_ready_i[0]), .rsp_data_o(core_csr_rsp_data_o[0]),
    .t_req_valid_o(bar_valid[0]), .t_req_ready_i(bar_ready[0]), .t_req_o(bar_req[0]),
    .t_rsp_valid_i(bar_rvalid[0]), .t_rsp_ready_o(bar_rready[0]), .t_rsp_data_i(bar_rdata[0])
  );

  csr_router #(.NT(2), .BASE({CSR_BARRIER, CSR_GEMM_BASE}), .SIZE({12'd1, 12'd64})) u_rt1 (
    .clk_i, .rst_ni,
    .req_valid_i(core_csr_req_valid_i[1]), .req_ready_o(core_csr_req_ready_o[1]), .req_i(core_csr_req_i[1]),
    .rsp_valid_o(core_csr_rsp_valid_o[1]), .rsp_ready_i(core_csr_rsp_ready_i[1]), .rsp_data_o(core_csr_rsp_data_o[1]),
    .t_req_valid_o({bar_valid[1], u_valid[0]}), .t_req_ready_i({bar_ready[1], u_ready[0]}),
    .t_req_o({bar_req[1], u_req[0]}),
    .t_rsp_valid_i({bar_rvalid[1], u_rvalid[0]}), .t_rsp_ready_o({bar_rready[1], u_rready[0]}),
    .t_rsp_data_i({bar_rdata[1], u_rdata[0]})
  );

  csr_router #(.NT(3), .BASE({CSR_BARRIER, CSR_DMA_BASE, CSR_MAXPOOL_BASE}),
               .SIZE({12'd1, 12'd16, 12'd64})) u_rt2 (
    .clk_i, .rst_ni,
    .req_valid_i(core_csr_req_valid_i[2]), .req_ready_o(core_csr_req_ready_o[2]), .req_i(core_csr_req_i[2]),
    .rsp_valid_o(core_csr_rsp_valid_o[2]), .rsp_ready_i(core_csr_rsp_ready_i[2]), .rsp_data_o(core_csr_rsp_data_o[2]),
    .t_req_valid_o({bar_valid[2], u_valid[2], u_valid[1]}), .t_req_ready_i({bar_ready[2], u_ready[2], u_ready[1]}),
    .t_req_o({bar_req[2], u_req[2], u_req[1]}),
    .t_rsp_valid_i({bar_rvalid[2], u_rvalid[2], u_rvalid[1]}),
    .t_rsp_ready_o({bar_rready[2], u_rready[2], u_rready[1]}),
    .t_rsp_data_i({bar_rdata[2], u_rdata[2], u_rdata[1]})
  );

  hw_barrier #(.N_CORES(N_CORES), .N_UNITS(3)) u_barrier (
    .clk_i, .rst_ni,
    .req_valid_i(bar_valid), .req_ready_o(bar_ready), .req_i(bar_req),
    .rsp_valid_o(bar_rvalid), .rsp_ready_i(bar_rready), .rsp_data_o(bar_rdata),
    .unit_busy_i(unit_busy_o), .releases_o(barrier_releases_o)
  );

  // ---------------- accelerators and DMA ----------------
  gemm_tile u_gemm (
    .clk_i, .rst_ni,
    .csr_req_valid_i(u_valid[0]), .csr_req_ready_o(u_ready[0]), .csr_req_i(u_req[0]),
    .csr_rsp_valid_o(u_rvalid[0]), .csr_rsp_ready_i(u_rready[0]), .csr_rsp_data_o(u_rdata[0]),
    .tcdm_req_valid_o(m_valid[M_GEMM +: 48]), .tcdm_req_ready_i(m_ready[M_GEMM +: 48]),
    .tcdm_req_o(m_req[M_GEMM +: 48]),
    .tcdm_rsp_valid_i(m_rvalid[M_GEMM +: 16]), .tcdm_rsp_data_i(m_rdata[M_GEMM +: 16]),
    .busy_o(unit_busy_o[0]), .mac_cycles_o(gemm_mac_cycles_o)
  );

  maxpool_tile u_maxpool (
    .clk_i, .rst_ni,
    .csr_req_valid_i(u_valid[1]), .csr_req_ready_o(u_ready[1]), .csr_req_i(u_req[1]),
    .csr_rsp_valid_o(u_rvalid[1]), .csr_rsp_ready_i(u_rready[1]), .csr_rsp_data_o(u_rdata[1]),
    .tcdm_req_valid_o(m_valid[M_MP +: 16]), .tcdm_req_ready_i(m_ready[M_MP +: 16]),
    .tcdm_req_o(m_req[M_MP +: 16]),
    .tcdm_rsp_valid_i(m_rvalid[M_MP +: 8]), .tcdm_rsp_data_i(m_rdata[M_MP +: 8]),
    .busy_o(unit_busy_o[1])
  );

  dma_engine u_dma (
    .clk_i, .rst_ni,
    .csr_req_valid_i(u_valid[2]), .csr_req_ready_o(u_ready[2]), .csr_req_i(u_req[2]),
    .csr_rsp_valid_o(u_rvalid[2]), .csr_rsp_ready_i(u_rready[2]), .csr_rsp_data_o(u_rdata[2]),
    .ar_valid_o(axi_ar_valid_o), .ar_ready_i(axi_ar_ready_i), .ar_addr_o(axi_ar_addr_o), .ar_len_o(axi_ar_len_o),
    .r_valid_i(axi_r_valid_i), .r_ready_o(axi_r_ready_o), .r_data_i(axi_r_data_i), .r_last_i(axi_r_last_i),
    .aw_valid_o(axi_aw_valid_o), .aw_ready_i(axi_aw_ready_i), .aw_addr_o(axi_aw_addr_o), .aw_len_o(axi_aw_len_o),
    .w_valid_o(axi_w_valid_o), .w_ready_i(axi_w_ready_i), .w_data_o(axi_w_data_o), .w_strb_o(axi_w_strb_o),
    .w_last_o(axi_w_last_o), .b_valid_i(axi_b_valid_i), .b_ready_o(axi_b_ready_o),
    .tcdm_req_valid_o(m_valid[M_DMA +: 8]), .tcdm_req_ready_i(m_ready[M_DMA +: 8]),
    .tcdm_req_o(m_req[M_DMA +: 8]),
    .tcdm_rsp_valid_i(m_rvalid[M_DMA +: 8]), .tcdm_rsp_data_i(m_rdata[M_DMA +: 8]),
    .busy_o(unit_busy_o[2])
  );

  initial assert (N_CORES >= 3) else $error("the GeMM + MaxPool cluster needs at least 3 cores");
endmodule
