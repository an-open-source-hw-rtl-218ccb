// gemm_accel: the GeMM datapath, 512 processing elements that multiply an
// 8x8 int8 tile A by an 8x8 int8 tile B in a single cycle.
//
// In each cycle where both an A and a B word are offered (512 bit each), the
// array computes P[m][n] = sum over k of A[m][k] * B[k][n] (signed 8-bit
// operands, 32-bit sums). It adds P to the 8x8 int32 accumulator. After
// k_tiles_i such steps the accumulator is an output tile C (2048 bit). C
// goes to a one-entry output register and the accumulator starts over.
// A(M x K_total) * B(K_total x N) is therefore computed as k_tiles_i
// consecutive 8x8x8 steps per output tile, and n_out_i output tiles make one
// task. The input is stalled only when a finished tile finds the output
// register still full.
//
// Layouts (this design's own): A byte m*8+k, B byte k*8+n, C word m*8+n
// (32 bit each). The 512 PEs, the 8x8x8 tile per cycle, the 512-bit inputs
// and the 2048-bit output port follow the paper. The paper also mentions a
// 512-bit output stream; the 2048-bit port was kept, since it holds
// unquantised int32 sums.
//
// Interface: start_i (one cycle) loads k_tiles_i / n_out_i (0 counts as 1).
// busy_o is high until the last C has been taken. Rate: one 8x8x8 step per
// cycle, and one C every k_tiles_i cycles.
module gemm_accel #(
  parameter int unsigned M = 8,
  parameter int unsigned K = 8,
  parameter int unsigned N = 8
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 start_i,
  input  logic [15:0]          k_tiles_i,
  input  logic [31:0]          n_out_i,
  output logic                 busy_o,
  input  logic                 a_valid_i,
  input  logic [M*K*8-1:0]     a_i,
  input  logic                 b_valid_i,
  input  logic [K*N*8-1:0]     b_i,
  output logic                 ab_ready_o,
  output logic                 c_valid_o,
  input  logic                 c_ready_i,
  output logic [M*N*32-1:0]    c_o,
  output logic [31:0]          mac_cycles_o
);
  logic active_q, c_valid_q, last_k, step;
  logic [15:0] kcnt_q, ktiles_q;
  logic [31:0] ocnt_q, nout_q, macs_q;
  logic [M*N-1:0][31:0] acc_q, acc_d, c_q;

  assign last_k = (kcnt_q + 1'b1 >= ktiles_q);
  assign ab_ready_o = active_q && a_valid_i && b_valid_i && (!last_k || !c_valid_q || c_ready_i);
  assign step = ab_ready_o;

  // The 8x8x8 multiplier array.
  always_comb begin
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++) begin
        logic signed [31:0] s;
        s = (kcnt_q == 0) ? 32'sd0 : signed'(acc_q[m*N+n]);
        for (int k = 0; k < K; k++)
          s = s + 32'(signed'(a_i[(m*K+k)*8 +: 8]) * signed'(b_i[(k*N+n)*8 +: 8]));
        acc_d[m*N+n] = s;
      end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q  <= 1'b0;
      c_valid_q <= 1'b0;
      kcnt_q    <= '0;
      ktiles_q  <= 16'd1;
      ocnt_q    <= '0;
      nout_q    <= 32'd1;
      acc_q     <= '0;
      c_q       <= '0;
      macs_q    <= '0;
    end else begin
      if (c_valid_q && c_ready_i) c_valid_q <= 1'b0;
      if (start_i) begin
        active_q <= 1'b1;
        kcnt_q   <= '0;
        ocnt_q   <= '0;
        ktiles_q <= (k_tiles_i == 0) ? 16'd1 : k_tiles_i;
        nout_q   <= (n_out_i == 0) ? 32'd1 : n_out_i;
      end else if (step) begin
        macs_q <= macs_q + 1'b1;
        if (last_k) begin
          c_q       <= acc_d;
          c_valid_q <= 1'b1;
          kcnt_q    <= '0;
          ocnt_q    <= ocnt_q + 1'b1;
          if (ocnt_q + 1'b1 >= nout_q) active_q <= 1'b0;
        end else begin
          acc_q  <= acc_d;
          kcnt_q <= kcnt_q + 1'b1;
        end
      end
    end
  end

  assign busy_o       = active_q || c_valid_q;
  assign c_valid_o    = c_valid_q;
  assign c_o          = c_q;
  assign mac_cycles_o = macs_q;
endmodule
