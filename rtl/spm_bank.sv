// spm_bank: one bank of the shared scratchpad memory.
//
// A single-port synchronous SRAM, DW bits wide and DEPTH rows deep, with a
// byte write strobe. It is written as an array. A foundry SRAM macro with the
// same ports can replace it. A request is taken in the cycle req_i is high,
// and read data appears on rdata_o in the next cycle. That is the
// "single-cycle" memory access that the cluster is built around. The contents
// are not reset.
module spm_bank #(
  parameter int unsigned DW    = 64,
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] addr_i,
  input  logic [DW/8-1:0]          strb_i,
  input  logic [DW-1:0]            wdata_i,
  output logic [DW-1:0]            rdata_o
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < DW / 8; b++)
          if (strb_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
