// rfu -- Runahead Filter Unit: arbitration and filtering of prefetch uops.
//
// Tentative-uop mechanism. Each runahead issue queue (RIQ) entry has two
// flags held here: granted and TentativeSent. The RIQ presents, per entry,
// whether it has a prefetch uop to send (cand). A candidate is suppressed
// while !granted && TentativeSent, so an instruction sends only its first
// (tentative) uop until it is granted. Among the remaining candidates the
// oldest, counted from the RIQ head, wins (sel_valid/sel_idx); when the
// load/store unit takes the uop (pf_fire) TentativeSent of that entry is set.
// granted is set when the RIQ entry is woken by the dependency management
// unit (it must fill a VMR entry) or when its tentative uop comes back with a
// latency the classifier calls an LLC miss. A tentative uop classified as a
// hit leaves the entry filtered: its remaining uops are never sent.
// Both flags are cleared when the entry is (re)allocated.
//
// The timestamp array times every load the LSU sends (lq_send) and answers
// (ld_done); all load latencies train the classifier. A returning uop only
// updates its RIQ entry if the entry still holds the same instruction (the
// sequence tag matches).
// Flags, suppression rule, timestamp array and classifier follow the design
// description (Sec. IV-E, Fig. 4(d)); oldest-first arbitration, training on
// all loads and the sequence-tag check are this implementation's choices.
//
// Lint note: the cycle counter `now` of the timestamp array and the data
// field of ld_done are not needed here (only latencies and tags are); they
// stay connected and show up as unused signals.
module rfu
  import dare_pkg::*;
#(
  parameter int unsigned DEPTH = RIQ_DEPTH,
  localparam int unsigned IW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // RIQ side
  input  logic               alloc_en,
  input  logic [IW-1:0]      alloc_idx,
  input  logic [SEQ_W-1:0]   alloc_seq,
  input  logic [DEPTH-1:0]   wake_mask,
  input  logic [IW-1:0]      head,
  input  logic [DEPTH-1:0]   cand,
  output logic               sel_valid,
  output logic [IW-1:0]      sel_idx,
  input  logic               pf_fire,
  // LSU side
  input  logic               lq_send_en,
  input  logic [LQ_IW-1:0]   lq_send_idx,
  input  logic               ld_done_en,
  input  ld_done_t           ld_done,
  // status
  output logic [DEPTH-1:0]   granted,
  output logic [DEPTH-1:0]   tent_sent,
  output logic [TS_W-1:0]    threshold,
  output logic               th_update,
  output logic               ev_pred_miss,   // tentative uop judged an LLC miss
  output logic               ev_pred_hit     // tentative uop judged a hit: filtered
);
  logic [SEQ_W-1:0] seq [DEPTH];
  logic [DEPTH-1:0] allowed;
  logic [TS_W-1:0]  lat, now;
  logic             miss;
  logic             tent_back;

  // suppression and oldest-first selection
  always_comb begin
    allowed   = cand & ~(~granted & tent_sent);
    sel_valid = 1'b0;
    sel_idx   = '0;
    for (int d = DEPTH-1; d >= 0; d--) begin
      if (allowed[IW'(head + IW'(d))]) begin
        sel_valid = 1'b1;
        sel_idx   = IW'(head + IW'(d));
      end
    end
  end

  timestamp_array #(.ENTRIES(LQ_DEPTH), .W(TS_W)) u_ts (
    .clk      (clk),
    .rst_n    (rst_n),
    .send_en  (lq_send_en),
    .send_idx (lq_send_idx),
    .recv_idx (ld_done.lq_idx),
    .latency  (lat),
    .now      (now)
  );

  latency_classifier #(
    .LAT_W(TS_W), .WINDOW(LAT_WINDOW), .BIN_SHIFT(BIN_SHIFT), .NBINS(NUM_BINS),
    .PEAK_PCT(PEAK_PCT), .MARGIN(MARGIN_BINS), .SLACK(SLACK), .INIT_TH(INIT_THRESH)
  ) u_cls (
    .clk        (clk),
    .rst_n      (rst_n),
    .sample_en  (ld_done_en),
    .sample_lat (lat),
    .q_lat      (lat),
    .q_miss     (miss),
    .threshold  (threshold),
    .th_update  (th_update)
  );

  assign tent_back = ld_done_en && ld_done.prefetch && ld_done.uop.tentative
                     && (seq[ld_done.uop.riq_idx] == ld_done.uop.seq)
                     && !granted[ld_done.uop.riq_idx];
  assign ev_pred_miss = tent_back && miss;
  assign ev_pred_hit  = tent_back && !miss;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      granted   <= '0;
      tent_sent <= '0;
      for (int i = 0; i < DEPTH; i++) seq[i] <= '0;
    end else begin
      granted <= (granted | wake_mask | (ev_pred_miss ? (DEPTH'(1) << ld_done.uop.riq_idx) : '0));
      if (pf_fire) tent_sent[sel_idx] <= 1'b1;
      if (alloc_en) begin
        granted[alloc_idx]   <= 1'b0;
        tent_sent[alloc_idx] <= 1'b0;
        seq[alloc_idx]       <= alloc_seq;
      end
    end
  end
endmodule
