// riq -- Runahead Issue Queue with its dependency management unit.
//
// A DEPTH-entry (32) circular queue. Every decoded instruction is written at
// the tail; the head is issued in order once it has no RAW, WAW or WAR
// conflict with the instructions still executing in the units (their
// destination and source register masks come in on busy_dst/busy_src), and
// the unit that will run it is ready. Each entry holds the whole instruction
// (with its tile shape), a decompose counter and its runahead links.
//
// Runahead: while a memory instruction waits in the queue it is decomposed,
// one matrix-register row per uop, into prefetch uops. The entry offers a
// uop (cand) while its counter is below the tile height and its addresses
// are known: mld and mst compute base + row*stride; an mgather needs a
// complete VMR vector (vsrc) from a pre-executed producer and reads its
// per-row base address from the VMR. mscatter sends no prefetches. The
// filter unit (rfu, instantiated here) picks one candidate per cycle; its
// uop goes to the load/store unit on pf_valid/pf_ready and the counter
// advances. Entries woken by the DMU (dmu, instantiated here) carry a VMR
// destination: their uops write the first 48 bits of each returned row there.
// Waking restarts the entry's decompose counter, so rows it had already sent
// without a VMR destination (its tentative uop) are sent again.
//
// VMR life cycle seen from the queue: a consumer reports done_mask when it
// has read all rows of its source vector or leaves the queue; a producer
// that leaves the queue before sending all rows reports abort_mask; a
// consumer whose source is dead drops it (and aborts its own destination).
// Queue size, per-entry contents, head-only issue with the three conflict
// checks, uop decomposition per row and the RIQ/DMU/RFU split follow the
// design description (Sec. IV-B..E, Fig. 4(b)); one issue per cycle, no
// prefetch for mscatter and the abort rules are this design's choices.
module riq
  import dare_pkg::*;
#(
  parameter int unsigned DEPTH = RIQ_DEPTH,
  localparam int unsigned IW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // enqueue from the decoder
  input  logic                 enq_valid,
  output logic                 enq_ready,
  input  minstr_t              enq_instr,
  // in-order issue
  input  logic [NUM_MREGS-1:0] busy_dst,
  input  logic [NUM_MREGS-1:0] busy_src,
  output logic                 iss_valid,
  input  logic                 iss_ready,
  output minstr_t              iss_instr,
  // prefetch uops to the LSU
  output logic                 pf_valid,
  input  logic                 pf_ready,
  output pf_uop_t              pf_uop,
  // load observations from the LSU (for the filter)
  input  logic                 lq_send_en,
  input  logic [LQ_IW-1:0]     lq_send_idx,
  input  logic                 ld_done_en,
  input  ld_done_t             ld_done,
  // VMR
  output logic [VMR_ENTRIES-1:0] vmr_alloc,
  output logic [ROW_IW:0]      vmr_rows [VMR_ENTRIES],
  output logic [$clog2(MAX_CHAIN):0] fl_alloc_n,
  input  logic [VMR_IW-1:0]    fl_idx [MAX_CHAIN],
  input  logic [VMR_IW:0]      fl_count,
  output logic                 vmr_sent_en,
  output logic [VMR_IW-1:0]    vmr_sent_idx,
  output logic [VMR_IW-1:0]    vmr_rd_idx,
  output logic [ROW_IW-1:0]    vmr_rd_row,
  input  logic [VMR_W-1:0]     vmr_rd_data,
  input  logic [VMR_ENTRIES-1:0] vmr_ready,
  input  logic [VMR_ENTRIES-1:0] vmr_dead,
  output logic [VMR_ENTRIES-1:0] vmr_done,
  output logic [VMR_ENTRIES-1:0] vmr_abort,
  // status and events
  output logic                 empty,
  output logic [IW:0]          count,
  output logic [TS_W-1:0]      threshold,
  output logic                 ev_stall,     // head held by a register conflict
  output logic                 ev_pred_miss,
  output logic                 ev_pred_hit,
  output logic                 ev_th_update,
  output logic                 ev_chain,
  output logic                 ev_chain_fail,
  output logic                 ev_suppressed // a candidate held back by the filter
);
  minstr_t          ent    [DEPTH];
  logic [4:0]       cnt    [DEPTH];
  logic [DEPTH-1:0] valid, chained, vsrc_v, vdst_v;
  logic [VMR_IW-1:0] vsrc  [DEPTH];
  logic [VMR_IW-1:0] vdst  [DEPTH];
  logic [IW-1:0]    head, tail;

  logic enq_fire, deq_fire, pf_fire;
  assign empty     = (count == '0);
  assign enq_ready = (count != (IW+1)'(DEPTH));
  assign enq_fire  = enq_valid && enq_ready;

  // ---------------- issue
  logic [NUM_MREGS-1:0] h_dst, h_src;
  logic hazard;
  always_comb begin
    h_dst  = dst_mask(ent[head]);
    h_src  = src_mask(ent[head]);
    hazard = |(h_dst & (busy_dst | busy_src)) || |(h_src & busy_dst);
  end
  assign iss_valid = valid[head] && !hazard;
  assign iss_instr = ent[head];
  assign deq_fire  = iss_valid && iss_ready;
  assign ev_stall  = valid[head] && hazard;

  // ---------------- prefetch candidates
  logic [DEPTH-1:0] cand;
  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      cand[i] = 1'b0;
      if (valid[i] && cnt[i] < ent[i].shape.m) begin
        unique case (ent[i].op)
          OP_MLD, OP_MST: cand[i] = 1'b1;
          OP_MGATHER:     cand[i] = vsrc_v[i] && vmr_ready[vsrc[i]];
          default:        cand[i] = 1'b0;
        endcase
      end
    end
  end

  // ---------------- DMU
  op_e               f_op   [DEPTH];
  logic [MREG_IW-1:0] f_md  [DEPTH];
  logic [MREG_IW-1:0] f_ms1 [DEPTH];
  logic [4:0]        f_rows [DEPTH];
  logic [SEQ_W-1:0]  f_seq  [DEPTH];
  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      f_op[i]   = ent[i].op;
      f_md[i]   = ent[i].md;
      f_ms1[i]  = ent[i].ms1;
      f_rows[i] = ent[i].shape.m;
      f_seq[i]  = ent[i].seq;
    end
  end

  logic [DEPTH-1:0]  set_chained, set_dst, set_src, wake;
  logic [VMR_IW-1:0] dst_vidx [DEPTH];
  logic [VMR_IW-1:0] src_vidx [DEPTH];
  logic [4:0]        d_rows   [VMR_ENTRIES];

  dmu #(.DEPTH(DEPTH), .MAXC(MAX_CHAIN), .NV(VMR_ENTRIES)) u_dmu (
    .clk         (clk),
    .rst_n       (rst_n),
    .valid       (valid),
    .op          (f_op),
    .md          (f_md),
    .ms1         (f_ms1),
    .rows        (f_rows),
    .seq         (f_seq),
    .chained     (chained),
    .vsrc_v      (vsrc_v),
    .vdst_v      (vdst_v),
    .head        (head),
    .deq_en      (deq_fire),
    .deq_idx     (head),
    .free_count  (fl_count),
    .free_idx    (fl_idx),
    .alloc_n     (fl_alloc_n),
    .vmr_alloc   (vmr_alloc),
    .vmr_rows    (d_rows),
    .set_chained (set_chained),
    .set_dst     (set_dst),
    .set_src     (set_src),
    .dst_vidx    (dst_vidx),
    .src_vidx    (src_vidx),
    .wake        (wake),
    .ev_chain    (ev_chain),
    .ev_fail     (ev_chain_fail)
  );
  always_comb begin
    for (int e = 0; e < VMR_ENTRIES; e++) vmr_rows[e] = d_rows[e];
  end

  // ---------------- RFU
  logic          sel_valid;
  logic [IW-1:0] sel_idx;
  logic [DEPTH-1:0] granted, tent_sent;

  rfu #(.DEPTH(DEPTH)) u_rfu (
    .clk          (clk),
    .rst_n        (rst_n),
    .alloc_en     (enq_fire),
    .alloc_idx    (tail),
    .alloc_seq    (enq_instr.seq),
    .wake_mask    (wake),
    .head         (head),
    .cand         (cand),
    .sel_valid    (sel_valid),
    .sel_idx      (sel_idx),
    .pf_fire      (pf_fire),
    .lq_send_en   (lq_send_en),
    .lq_send_idx  (lq_send_idx),
    .ld_done_en   (ld_done_en),
    .ld_done      (ld_done),
    .granted      (granted),
    .tent_sent    (tent_sent),
    .threshold    (threshold),
    .th_update    (ev_th_update),
    .ev_pred_miss (ev_pred_miss),
    .ev_pred_hit  (ev_pred_hit)
  );
  assign ev_suppressed = |(cand & ~granted & tent_sent);

  // ---------------- uop formation for the selected entry
  assign vmr_rd_idx = vsrc[sel_idx];
  assign vmr_rd_row = ROW_IW'(cnt[sel_idx]);
  always_comb begin
    pf_uop           = '0;
    pf_uop.riq_idx   = sel_idx;
    pf_uop.seq       = ent[sel_idx].seq;
    pf_uop.tentative = (cnt[sel_idx] == '0);
    pf_uop.vmr_we    = vdst_v[sel_idx];
    pf_uop.vmr_idx   = vdst[sel_idx];
    pf_uop.row       = ROW_IW'(cnt[sel_idx]);
    if (ent[sel_idx].op == OP_MGATHER) pf_uop.addr = vmr_rd_data;
    else pf_uop.addr = ent[sel_idx].base
                       + ADDR_W'(ent[sel_idx].stride * XLEN'(cnt[sel_idx]));
  end
  // do not prefetch for the entry that issues in this same cycle
  assign pf_valid     = sel_valid && !(deq_fire && sel_idx == head);
  assign pf_fire      = pf_valid && pf_ready;
  assign vmr_sent_en  = pf_fire && vdst_v[sel_idx];
  assign vmr_sent_idx = vdst[sel_idx];

  // ---------------- VMR consumer / producer notifications
  always_comb begin
    vmr_done  = '0;
    vmr_abort = '0;
    for (int i = 0; i < DEPTH; i++) begin
      if (valid[i] && vsrc_v[i] && vmr_dead[vsrc[i]]) begin
        vmr_done[vsrc[i]] = 1'b1;
        if (vdst_v[i]) vmr_abort[vdst[i]] = 1'b1;
      end
    end
    if (pf_fire && vsrc_v[sel_idx] && cnt[sel_idx] + 5'd1 == ent[sel_idx].shape.m)
      vmr_done[vsrc[sel_idx]] = 1'b1;
    if (deq_fire) begin
      if (vsrc_v[head]) vmr_done[vsrc[head]] = 1'b1;
      if (vdst_v[head] && cnt[head] < ent[head].shape.m) vmr_abort[vdst[head]] = 1'b1;
    end
  end

  // ---------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head    <= '0;
      tail    <= '0;
      count   <= '0;
      valid   <= '0;
      chained <= '0;
      vsrc_v  <= '0;
      vdst_v  <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        ent[i]  <= '0;
        cnt[i]  <= '0;
        vsrc[i] <= '0;
        vdst[i] <= '0;
      end
    end else begin
      for (int i = 0; i < DEPTH; i++) begin
        if (set_chained[i]) chained[i] <= 1'b1;
        if (set_dst[i]) begin vdst_v[i] <= 1'b1; vdst[i] <= dst_vidx[i]; end
        if (set_src[i]) begin vsrc_v[i] <= 1'b1; vsrc[i] <= src_vidx[i]; end
        if (valid[i] && vsrc_v[i] && vmr_dead[vsrc[i]]) begin
          vsrc_v[i] <= 1'b0;
          vdst_v[i] <= 1'b0;
        end
      end
      if (pf_fire) cnt[sel_idx] <= cnt[sel_idx] + 5'd1;
      // a woken producer restarts its rows so that every one reaches the VMR
      for (int i = 0; i < DEPTH; i++) if (set_dst[i]) cnt[i] <= '0;
      if (deq_fire) begin
        valid[head] <= 1'b0;
        head        <= head + 1'b1;
      end
      if (enq_fire) begin
        ent[tail]     <= enq_instr;
        cnt[tail]     <= '0;
        valid[tail]   <= 1'b1;
        chained[tail] <= 1'b0;
        vsrc_v[tail]  <= 1'b0;
        vdst_v[tail]  <= 1'b0;
        tail          <= tail + 1'b1;
      end
      count <= count + (IW+1)'(enq_fire) - (IW+1)'(deq_fire);
    end
  end

endmodule
