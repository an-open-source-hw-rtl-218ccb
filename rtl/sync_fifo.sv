// sync_fifo: synchronous first-in first-out buffer with valid-ready ports.
//
// The streamers and the DMA use it to absorb memory conflicts: a word that
// the interconnect grants late waits here, so the accelerator can still get
// one word per cycle. Data is written into a circular array. push_ready is
// low when the FIFO is full and pop_valid is low when it is empty. A push and
// a pop may happen in the same cycle. An item pushed in cycle t can be
// popped in cycle t+1 (no fall-through). `count` gives the fill level so a
// producer can reserve space for requests that are still in flight.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     push_valid_i,
  output logic                     push_ready_o,
  input  logic [WIDTH-1:0]         push_data_i,
  output logic                     pop_valid_o,
  input  logic                     pop_ready_i,
  output logic [WIDTH-1:0]         pop_data_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0] wptr, rptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;
  logic push, pop;

  assign push_ready_o = (32'(cnt) < DEPTH);
  assign pop_valid_o  = (cnt != 0);
  assign push = push_valid_i && push_ready_o;
  assign pop  = pop_valid_o && pop_ready_i;
  assign pop_data_o = mem[rptr];
  assign count_o = cnt;

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr <= '0;
      rptr <= '0;
      cnt  <= '0;
    end else begin
      if (push) wptr <= incr(wptr);
      if (pop)  rptr <= incr(rptr);
      if (push && !pop) cnt <= cnt + 1'b1;
      else if (pop && !push) cnt <= cnt - 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem[wptr] <= push_data_i;
  end

  // A pop from an empty or a push into a full FIFO cannot happen by
  // construction; this guards the counter.
  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni) 32'(cnt) <= DEPTH);
endmodule
