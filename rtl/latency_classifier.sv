// latency_classifier -- dynamic-threshold hit/miss classifier of the filter.
//
// Input: the latency of each completed load (sample_en/sample_lat). The
// classifier keeps the last WINDOW (32) latencies in a FIFO, stored as their
// histogram bin number, and an incrementally maintained histogram with bins
// of 2^BIN_SHIFT (8) cycles; latencies beyond the last bin count in it.
// Every cycle it looks for peaks, bins holding more than PEAK_PCT (20 %) of
// the samples currently in the window, and keeps the lowest and the highest.
// If they lie more than MARGIN (4) bins apart, the threshold register is set,
// one cycle later, to the lower edge of the emptiest bin strictly between
// them (the lowest such bin on a tie) plus SLACK (32) cycles. Otherwise the
// threshold keeps its value; after reset it is INIT_THRESH (64).
// Query: q_miss = q_lat > threshold, combinational.
// Window, bin size, peak level, margin and slack follow the design
// description; the number of bins, the initial threshold, "lower edge of the
// bin" as the bin's latency and the tie rule are this implementation's.
module latency_classifier #(
  parameter int unsigned LAT_W     = 16,
  parameter int unsigned WINDOW    = 32,
  parameter int unsigned BIN_SHIFT = 3,
  parameter int unsigned NBINS     = 32,
  parameter int unsigned PEAK_PCT  = 20,
  parameter int unsigned MARGIN    = 4,
  parameter int unsigned SLACK     = 32,
  parameter int unsigned INIT_TH   = 64,
  localparam int unsigned BW       = $clog2(NBINS),
  localparam int unsigned CW       = $clog2(WINDOW+1),
  localparam int unsigned PW       = $clog2(WINDOW)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sample_en,
  input  logic [LAT_W-1:0] sample_lat,
  input  logic [LAT_W-1:0] q_lat,
  output logic             q_miss,
  output logic [LAT_W-1:0] threshold,
  output logic             th_update    // threshold register written this cycle
);
  logic [BW-1:0] fifo [WINDOW];
  logic [PW-1:0] wptr;
  logic [CW-1:0] fill;
  logic [CW-1:0] hist [NBINS];
  logic [BW-1:0] new_bin;

  assign new_bin = ((sample_lat >> BIN_SHIFT) >= LAT_W'(NBINS)) ? BW'(NBINS-1)
                                                                : BW'(sample_lat >> BIN_SHIFT);

  // histogram and window FIFO
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      fill <= '0;
      for (int b = 0; b < NBINS; b++) hist[b] <= '0;
      for (int i = 0; i < WINDOW; i++) fifo[i] <= '0;
    end else if (sample_en) begin
      fifo[wptr] <= new_bin;
      wptr       <= (wptr == PW'(WINDOW-1)) ? '0 : wptr + 1'b1;
      if (fill == CW'(WINDOW)) begin
        // evict the oldest sample (the one being overwritten)
        for (int b = 0; b < NBINS; b++) begin
          if (BW'(b) == new_bin && BW'(b) != fifo[wptr]) hist[b] <= hist[b] + 1'b1;
          else if (BW'(b) != new_bin && BW'(b) == fifo[wptr]) hist[b] <= hist[b] - 1'b1;
        end
      end else begin
        fill          <= fill + 1'b1;
        hist[new_bin] <= hist[new_bin] + 1'b1;
      end
    end
  end

  // peak search and valley
  logic          lo_found, hi_found, do_update;
  logic [BW-1:0] lo_pk, hi_pk, valley;
  logic [CW-1:0] vmin;
  always_comb begin
    lo_found = 1'b0; hi_found = 1'b0;
    lo_pk = '0; hi_pk = '0;
    for (int b = 0; b < NBINS; b++) begin
      // relative frequency above PEAK_PCT percent of the samples in the window
      if (32'(hist[b]) * 100 > 32'(PEAK_PCT) * 32'(fill)) begin
        if (!lo_found) begin lo_pk = BW'(b); lo_found = 1'b1; end
        hi_pk    = BW'(b);
        hi_found = 1'b1;
      end
    end
    valley = lo_pk;
    vmin   = {CW{1'b1}};
    for (int b = 0; b < NBINS; b++) begin
      if (BW'(b) > lo_pk && BW'(b) < hi_pk && hist[b] < vmin) begin
        vmin   = hist[b];
        valley = BW'(b);
      end
    end
    do_update = lo_found && hi_found && (32'(hi_pk) - 32'(lo_pk) > MARGIN);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      threshold <= LAT_W'(INIT_TH);
      th_update <= 1'b0;
    end else begin
      th_update <= do_update;
      if (do_update) threshold <= (LAT_W'(valley) << BIN_SHIFT) + LAT_W'(SLACK);
    end
  end

  assign q_miss = q_lat > threshold;
endmodule
