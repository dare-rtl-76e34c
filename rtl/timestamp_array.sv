// timestamp_array -- per-load send time, giving each load's latency.
//
// One 16-bit timestamp per load-queue entry. A free-running 16-bit cycle
// counter is written into the entry of a load when it is sent to the LLC
// (send_en/send_idx); when its answer comes back (recv_idx) the latency is
// the counter minus the stored stamp, modulo 2^16, available combinationally
// in the same cycle. The LQ-sized array of 16-bit entries follows Fig. 4(d);
// the free-running counter is this implementation's choice.
module timestamp_array #(
  parameter int unsigned ENTRIES = 48,
  parameter int unsigned W       = 16,
  localparam int unsigned IW     = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          send_en,
  input  logic [IW-1:0] send_idx,
  input  logic [IW-1:0] recv_idx,
  output logic [W-1:0]  latency,
  output logic [W-1:0]  now
);
  logic [W-1:0] ts [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ts[i] <= '0;
    end else if (send_en) begin
      ts[send_idx] <= now;
    end
  end

  assign latency = now - ts[recv_idx];
endmodule
