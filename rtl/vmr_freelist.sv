// vmr_freelist -- free list of VMR entries, kept as a circular queue.
//
// After reset the queue holds every entry index 0..N-1. The dependency
// management unit takes up to MAXA entries in one cycle: alloc_idx[i] shows
// the i-th free index and alloc_n (<= count) pops that many. A released
// entry is pushed back at the tail, one per cycle. The circular-queue free
// list follows the design description (Fig. 4(c)); the multi-pop port is this
// implementation's choice so that a whole dependency chain gets its entries
// at once.
//
// Lint note: rst_n is an asynchronous reset and also the `disable iff`
// condition of the handshake assertions, which lint reports as a net used
// both synchronously and asynchronously; it is not a circuit problem.
module vmr_freelist #(
  parameter int unsigned N    = 16,
  parameter int unsigned MAXA = 4,
  localparam int unsigned IW  = $clog2(N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [$clog2(MAXA):0] alloc_n,
  output logic [IW-1:0]         alloc_idx [MAXA],
  output logic [IW:0]           count,
  input  logic                  rel_valid,
  input  logic [IW-1:0]         rel_idx
);
  logic [IW-1:0] q [N];
  logic [IW-1:0] head, tail;

  always_comb begin
    for (int i = 0; i < MAXA; i++) alloc_idx[i] = q[IW'(head + IW'(i))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) q[i] <= IW'(i);
      head  <= '0;
      tail  <= '0;
      count <= (IW+1)'(N);
    end else begin
      if (rel_valid) begin
        q[tail] <= rel_idx;
        tail    <= tail + 1'b1;
      end
      head  <= head + IW'(alloc_n);
      count <= count - (IW+1)'(alloc_n) + (IW+1)'(rel_valid);
    end
  end

`ifndef SYNTHESIS
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    (IW+1)'(alloc_n) <= count) else $error("free list underflow");
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(rel_valid && count == (IW+1)'(N) && alloc_n == 0)) else $error("free list overflow");
`endif
endmodule
