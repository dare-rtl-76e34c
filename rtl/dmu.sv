// dmu -- Dependency Management Unit of the runahead issue queue.
//
// For an mgather waiting in the RIQ the base-address vector it needs comes
// from an older instruction that writes its ms1. The DMU finds that chain of
// producers so it can be pre-executed:
//   IDLE  pick the oldest mgather not yet handled (chained == 0).
//   WALK  one step per cycle, search backward from the current consumer for
//         the youngest older entry that writes the consumer's source register.
//         An mld ends the chain; an mgather that already has its own source
//         vector (it is a consumer of an earlier chain) ends it too; another
//         mgather becomes the next consumer and the walk goes on. A producer
//         that is an mma, one already woken for another consumer, no producer
//         at all or a chain deeper than MAXC ends the attempt: the mgather is
//         marked handled and gets no runahead.
//   ALLOC when the VMR free list holds one entry per producer, wake the chain
//         in one cycle: every producer gets a VMR entry as its runahead
//         destination (set_dst, and `wake` so the filter grants all its uops)
//         and its consumer gets the same entry as its address source
//         (set_src). The oldest producer (the mld) can then start at once and
//         each one that completes makes its consumer ready.
// If any entry of the chain leaves the queue meanwhile, the attempt is
// dropped and retried. Backward traversal ending at an mld, waking, VMR
// allocation per woken instruction and release after the consumer reads
// follow the design description (Sec. IV-C); allocating the whole chain at
// once, the chain depth limit and the failure rules are this design's own.
module dmu
  import dare_pkg::*;
#(
  parameter int unsigned DEPTH = RIQ_DEPTH,
  parameter int unsigned MAXC  = MAX_CHAIN,
  parameter int unsigned NV    = VMR_ENTRIES,
  localparam int unsigned IW   = $clog2(DEPTH),
  localparam int unsigned VW   = $clog2(NV),
  localparam int unsigned CW   = $clog2(MAXC)
) (
  input  logic                clk,
  input  logic                rst_n,
  // RIQ state
  input  logic [DEPTH-1:0]    valid,
  input  op_e                 op   [DEPTH],
  input  logic [MREG_IW-1:0]  md   [DEPTH],
  input  logic [MREG_IW-1:0]  ms1  [DEPTH],
  input  logic [4:0]          rows [DEPTH],
  input  logic [SEQ_W-1:0]    seq  [DEPTH],
  input  logic [DEPTH-1:0]    chained,
  input  logic [DEPTH-1:0]    vsrc_v,
  input  logic [DEPTH-1:0]    vdst_v,
  input  logic [IW-1:0]       head,
  input  logic                deq_en,
  input  logic [IW-1:0]       deq_idx,
  // VMR free list
  input  logic [VW:0]         free_count,
  input  logic [VW-1:0]       free_idx [MAXC],
  output logic [CW:0]         alloc_n,
  output logic [NV-1:0]       vmr_alloc,
  output logic [4:0]          vmr_rows [NV],
  // RIQ updates
  output logic [DEPTH-1:0]    set_chained,
  output logic [DEPTH-1:0]    set_dst,
  output logic [DEPTH-1:0]    set_src,
  output logic [VW-1:0]       dst_vidx [DEPTH],
  output logic [VW-1:0]       src_vidx [DEPTH],
  output logic [DEPTH-1:0]    wake,
  // events
  output logic                ev_chain,
  output logic                ev_fail
);
  typedef enum logic [1:0] {S_IDLE, S_WALK, S_ALLOC} state_e;
  state_e state;

  logic [IW-1:0]      g_idx, cur_idx;
  logic [SEQ_W-1:0]   g_seq;
  logic [MREG_IW-1:0] cur_reg;
  logic [IW-1:0]      ch_idx [MAXC];
  logic [SEQ_W-1:0]   ch_seq [MAXC];
  logic [CW:0]        len;

  // oldest unhandled mgather
  logic          pick_v;
  logic [IW-1:0] pick;
  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    for (int d = DEPTH-1; d >= 0; d--) begin
      automatic logic [IW-1:0] i = IW'(head + IW'(d));
      if (valid[i] && !chained[i] && op[i] == OP_MGATHER) begin
        pick_v = 1'b1;
        pick   = i;
      end
    end
  end

  // youngest entry older than cur_idx that writes cur_reg
  logic          prod_v;
  logic [IW-1:0] prod;
  always_comb begin
    automatic logic [IW-1:0] age = cur_idx - head;
    prod_v = 1'b0;
    prod   = '0;
    for (int d = DEPTH-1; d >= 1; d--) begin
      automatic logic [IW-1:0] i = IW'(cur_idx - IW'(d));
      if (IW'(d) <= age && valid[i] && md[i] == cur_reg
          && op[i] inside {OP_MLD, OP_MGATHER, OP_MMA}) begin
        prod_v = 1'b1;
        prod   = i;
      end
    end
  end

  // is the recorded chain still in the queue?
  logic alive;
  always_comb begin
    alive = valid[g_idx] && seq[g_idx] == g_seq && !(deq_en && deq_idx == g_idx);
    for (int k = 0; k < MAXC; k++) begin
      if ((CW+1)'(k) < len) begin
        if (!valid[ch_idx[k]] || seq[ch_idx[k]] != ch_seq[k] || (deq_en && deq_idx == ch_idx[k]))
          alive = 1'b0;
      end
    end
  end

  logic commit;
  assign commit = (state == S_ALLOC) && alive && (free_count >= (VW+1)'(len));

  always_comb begin
    alloc_n     = '0;
    vmr_alloc   = '0;
    set_chained = '0;
    set_dst     = '0;
    set_src     = '0;
    ev_fail     = 1'b0;
    for (int e = 0; e < NV; e++) vmr_rows[e] = '0;
    for (int i = 0; i < DEPTH; i++) begin
      dst_vidx[i] = '0;
      src_vidx[i] = '0;
    end
    if (commit) begin
      alloc_n = len;
      set_chained[g_idx] = 1'b1;
      for (int k = 0; k < MAXC; k++) begin
        if ((CW+1)'(k) < len) begin
          automatic logic [IW-1:0] cons = (k == 0) ? g_idx : ch_idx[(k == 0) ? 0 : k-1];
          vmr_alloc[free_idx[k]] = 1'b1;
          vmr_rows[free_idx[k]]  = rows[ch_idx[k]];
          set_dst[ch_idx[k]]     = 1'b1;
          set_chained[ch_idx[k]] = 1'b1;
          dst_vidx[ch_idx[k]]    = free_idx[k];
          set_src[cons]          = 1'b1;
          src_vidx[cons]         = free_idx[k];
        end
      end
    end else if (state == S_WALK && alive) begin
      if (!prod_v || op[prod] == OP_MMA || vdst_v[prod]
          || (op[prod] == OP_MGATHER && chained[prod] && !vsrc_v[prod])
          || (op[prod] == OP_MGATHER && !vsrc_v[prod] && len == (CW+1)'(MAXC-1))) begin
        set_chained[g_idx] = 1'b1;
        ev_fail            = 1'b1;
      end
    end
  end
  assign wake     = set_dst;
  assign ev_chain = commit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      g_idx   <= '0;
      g_seq   <= '0;
      cur_idx <= '0;
      cur_reg <= '0;
      len     <= '0;
      for (int k = 0; k < MAXC; k++) begin
        ch_idx[k] <= '0;
        ch_seq[k] <= '0;
      end
    end else begin
      unique case (state)
        S_IDLE: if (pick_v && !(deq_en && deq_idx == pick)) begin
          g_idx   <= pick;
          g_seq   <= seq[pick];
          cur_idx <= pick;
          cur_reg <= ms1[pick];
          len     <= '0;
          state   <= S_WALK;
        end
        S_WALK: begin
          if (!alive || ev_fail) begin
            state <= S_IDLE;
          end else begin
            ch_idx[len[CW-1:0]] <= prod;
            ch_seq[len[CW-1:0]] <= seq[prod];
            len <= len + 1'b1;
            if (op[prod] == OP_MLD || vsrc_v[prod]) state <= S_ALLOC;
            else begin
              cur_idx <= prod;
              cur_reg <= ms1[prod];
            end
          end
        end
        S_ALLOC: if (!alive || commit) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
