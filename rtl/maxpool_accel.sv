// maxpool_accel: MP_KERNELS parallel max-pooling kernels on a 512-bit stream.
//
// The input word holds 8 kernels x 8 signed int8 channels. The data streamer
// feeds the elements of one pooling window, one word per cycle, in whatever
// order its loops give (for a 3x3 window: 9 words). Each kernel keeps the
// running maximum of each of its channels. After win_i words the maxima go to
// a one-entry output register as one 512-bit word, and the next window
// starts. So a window of any size, set at run time, costs win_i cycles, and
// 64 channels are pooled in parallel. The 8 kernels, the run-time kernel size
// and the 512-bit stream widths follow the paper. The split of each word into
// 8 channels per kernel, and window elements arriving in time, are this
// design's own.
//
// Interface: start_i (one cycle) loads win_i and n_out_i (0 counts as 1).
// busy_o is high until the last output has been taken. Rate: one input word
// per cycle. Input stalls only while the output register is full and a
// window is complete.
module maxpool_accel #(
  parameter int unsigned N_KERNELS = 8,
  parameter int unsigned LANES_PER_KERNEL = 8
) (
  input  logic                                    clk_i,
  input  logic                                    rst_ni,
  input  logic                                    start_i,
  input  logic [7:0]                              win_i,
  input  logic [31:0]                             n_out_i,
  output logic                                    busy_o,
  input  logic                                    in_valid_i,
  output logic                                    in_ready_o,
  input  logic [N_KERNELS*LANES_PER_KERNEL*8-1:0] in_i,
  output logic                                    out_valid_o,
  input  logic                                    out_ready_i,
  output logic [N_KERNELS*LANES_PER_KERNEL*8-1:0] out_o
);
  localparam int unsigned NL = N_KERNELS * LANES_PER_KERNEL;

  logic active_q, out_valid_q, last, step;
  logic [7:0] cnt_q, win_q;
  logic [31:0] ocnt_q, nout_q;
  logic [NL-1:0][7:0] max_q, max_d, out_q;

  assign last       = (cnt_q + 1'b1 >= win_q);
  assign in_ready_o = active_q && (!last || !out_valid_q || out_ready_i);
  assign step       = in_valid_i && in_ready_o;

  // One comparator per channel; kernel k owns channels k*LANES_PER_KERNEL +: LANES_PER_KERNEL.
  for (genvar k = 0; k < N_KERNELS; k++) begin : g_kernel
    for (genvar c = 0; c < LANES_PER_KERNEL; c++) begin : g_ch
      localparam int unsigned L = k * LANES_PER_KERNEL + c;
      logic signed [7:0] x;
      assign x = signed'(in_i[L*8 +: 8]);
      assign max_d[L] = (cnt_q == 0 || x > signed'(max_q[L])) ? x : max_q[L];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q    <= 1'b0;
      out_valid_q <= 1'b0;
      cnt_q       <= '0;
      win_q       <= 8'd1;
      ocnt_q      <= '0;
      nout_q      <= 32'd1;
      max_q       <= '0;
      out_q       <= '0;
    end else begin
      if (out_valid_q && out_ready_i) out_valid_q <= 1'b0;
      if (start_i) begin
        active_q <= 1'b1;
        cnt_q    <= '0;
        ocnt_q   <= '0;
        win_q    <= (win_i == 0) ? 8'd1 : win_i;
        nout_q   <= (n_out_i == 0) ? 32'd1 : n_out_i;
      end else if (step) begin
        if (last) begin
          out_q       <= max_d;
          out_valid_q <= 1'b1;
          cnt_q       <= '0;
          ocnt_q      <= ocnt_q + 1'b1;
          if (ocnt_q + 1'b1 >= nout_q) active_q <= 1'b0;
        end else begin
          max_q <= max_d;
          cnt_q <= cnt_q + 1'b1;
        end
      end
    end
  end

  assign busy_o      = active_q || out_valid_q;
  assign out_valid_o = out_valid_q;
  assign out_o       = out_q;
endmodule
