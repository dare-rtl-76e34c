// lsu -- Load Store Unit with a 48-entry load queue and 48-entry store queue.
//
// The unit connects the matrix unit to the last-level cache through a
// row-wide port: one request per cycle carrying a 64-byte row, a byte mask
// and, for loads, the index of the load-queue (LQ) entry as tag. Loads are
// answered by tag, in any order; stores are posted.
//
// Demand side: one memory instruction at a time (mld, mst, mgather,
// mscatter) is taken from the issue stage and split into one request per
// tile row. mld/mst use base + row*stride, mgather/mscatter take the row's
// address from bits [47:0] of row r of ms1 (row read port 0). Load data is
// written to row r of md with the bytes beyond matrixK cleared; store rows
// (row read port 1) go into the store queue (SQ), which drains to the cache
// ahead of everything else. A load instruction finishes when all its rows
// are back, a store when all its rows are in the SQ. To keep memory order
// simple, demand loads wait until the SQ is empty.
// Prefetch side: a prefetch uop from the filter unit is sent when neither
// the SQ nor a demand load wants the port and an LQ entry is free. Its data
// is dropped, except that the first 48 bits go to the VMR when the uop
// belongs to a woken producer.
// Every load sent (lq_send) and every load answered (ld_done) is reported so
// that the filter can time it. LQ/SQ sizes follow the design description;
// the port format, priorities and the SQ-drain ordering rule are this
// implementation's choices.
//
// Lint note: rst_n is an asynchronous reset and also the `disable iff`
// condition of the handshake assertions, which lint reports as a net used
// both synchronously and asynchronously; it is not a circuit problem.
module lsu
  import dare_pkg::*;
#(
  parameter int unsigned LQ_N = LQ_DEPTH,
  parameter int unsigned SQ_N = SQ_DEPTH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // demand instructions
  input  logic                 iss_valid,
  output logic                 iss_ready,
  input  minstr_t              iss_instr,
  output logic [NUM_MREGS-1:0] busy_dst,
  output logic [NUM_MREGS-1:0] busy_src,
  output logic                 done,
  // matrix register file
  output logic [MREG_IW-1:0]   rr_idx [2],
  output logic [ROW_IW-1:0]    rr_row [2],
  input  row_t                 rr_data [2],
  output logic                 rw_en,
  output logic [MREG_IW-1:0]   rw_idx,
  output logic [ROW_IW-1:0]    rw_row,
  output row_t                 rw_data,
  // prefetch uops
  input  logic                 pf_valid,
  output logic                 pf_ready,
  input  pf_uop_t              pf_uop,
  // cache port
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_rsp_valid,
  input  mem_rsp_t             mem_rsp,
  // observations
  output logic                 lq_send_en,
  output logic [LQ_IW-1:0]     lq_send_idx,
  output logic                 ld_done_en,
  output ld_done_t             ld_done,
  output logic                 vmr_wr_en,
  output logic [VMR_IW-1:0]    vmr_wr_idx,
  output logic [ROW_IW-1:0]    vmr_wr_row,
  output logic [VMR_W-1:0]     vmr_wr_data,
  output logic                 sq_empty,
  output logic                 ev_sq_wait,   // demand load held until the SQ drains
  output logic                 ev_lq_full
);
  localparam int unsigned SIW = $clog2(SQ_N);

  // ---------------- load queue
  logic [LQ_N-1:0]   lq_busy, lq_pf;
  logic [ROW_IW-1:0] lq_row [LQ_N];
  pf_uop_t           lq_uop [LQ_N];
  logic              lq_free_v;
  logic [LQ_IW-1:0]  lq_free;
  always_comb begin
    lq_free_v = 1'b0;
    lq_free   = '0;
    for (int i = LQ_N-1; i >= 0; i--) begin
      if (!lq_busy[i]) begin
        lq_free_v = 1'b1;
        lq_free   = LQ_IW'(i);
      end
    end
  end

  // ---------------- store queue
  typedef struct packed {
    addr_t                addr;
    row_t                 data;
    logic [ROW_BYTES-1:0] mask;
  } sq_ent_t;
  sq_ent_t       sq [SQ_N];
  logic [SIW-1:0] sq_head, sq_tail;
  logic [SIW:0]   sq_cnt;
  logic           sq_push, sq_pop;

  // ---------------- demand instruction
  logic     active;
  minstr_t  cur;
  logic [4:0] sent, recv;
  logic     is_load, is_idx;
  logic [ROW_BYTES-1:0] kmask;
  addr_t    row_addr;

  assign is_load = (cur.op == OP_MLD) || (cur.op == OP_MGATHER);
  assign is_idx  = (cur.op == OP_MGATHER) || (cur.op == OP_MSCATTER);
  always_comb begin
    for (int b = 0; b < ROW_BYTES; b++) kmask[b] = (7'(b) < cur.shape.k);
  end

  assign rr_idx[0] = cur.ms1;
  assign rr_row[0] = ROW_IW'(sent);
  assign rr_idx[1] = cur.ms2;
  assign rr_row[1] = ROW_IW'(sent);
  assign row_addr  = is_idx ? rr_data[0][ADDR_W-1:0]
                            : cur.base + ADDR_W'(cur.stride * XLEN'(sent));

  logic dem_ld_want, dem_st_want, dem_ld_go, pf_go;
  assign dem_ld_want = active && is_load && (sent < cur.shape.m);
  assign dem_st_want = active && !is_load && (sent < cur.shape.m);
  assign sq_push     = dem_st_want && (sq_cnt != (SIW+1)'(SQ_N));
  assign ev_sq_wait  = dem_ld_want && (sq_cnt != '0);
  assign ev_lq_full  = !lq_free_v;
  assign sq_empty    = (sq_cnt == '0);

  // cache port arbitration: SQ, then demand loads, then prefetches
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    dem_ld_go     = 1'b0;
    pf_go         = 1'b0;
    sq_pop        = 1'b0;
    if (sq_cnt != '0) begin
      mem_req_valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = sq[sq_head].addr;
      mem_req.wdata = sq[sq_head].data;
      mem_req.wmask = sq[sq_head].mask;
      sq_pop        = mem_req_ready;
    end else if (dem_ld_want && lq_free_v) begin
      mem_req_valid = 1'b1;
      mem_req.addr  = row_addr;
      mem_req.wmask = kmask;
      mem_req.tag   = lq_free;
      dem_ld_go     = mem_req_ready;
    end else if (pf_valid && lq_free_v) begin
      mem_req_valid = 1'b1;
      mem_req.addr  = pf_uop.addr;
      mem_req.wmask = '1;
      mem_req.tag   = lq_free;
      pf_go         = mem_req_ready;
    end
  end
  assign pf_ready    = pf_go;
  assign lq_send_en  = dem_ld_go || pf_go;
  assign lq_send_idx = lq_free;

  // ---------------- answers
  always_comb begin
    ld_done_en     = mem_rsp_valid;
    ld_done        = '0;
    ld_done.lq_idx = mem_rsp.tag;
    ld_done.prefetch = lq_pf[mem_rsp.tag];
    ld_done.uop    = lq_uop[mem_rsp.tag];
    ld_done.rdata  = mem_rsp.rdata;
    rw_en          = mem_rsp_valid && !lq_pf[mem_rsp.tag];
    rw_idx         = cur.md;
    rw_row         = lq_row[mem_rsp.tag];
    for (int b = 0; b < ROW_BYTES; b++)
      rw_data[b*8 +: 8] = kmask[b] ? mem_rsp.rdata[b*8 +: 8] : 8'h00;
    vmr_wr_en   = mem_rsp_valid && lq_pf[mem_rsp.tag] && lq_uop[mem_rsp.tag].vmr_we;
    vmr_wr_idx  = lq_uop[mem_rsp.tag].vmr_idx;
    vmr_wr_row  = lq_uop[mem_rsp.tag].row;
    vmr_wr_data = mem_rsp.rdata[VMR_W-1:0];
  end

  logic [4:0] recv_n;
  assign recv_n = recv + 5'(rw_en);
  always_comb begin
    done = 1'b0;
    if (active) begin
      if (is_load) done = (recv_n >= cur.shape.m) && (sent >= cur.shape.m);
      else         done = (sent + 5'(sq_push) >= cur.shape.m);
    end
  end
  assign iss_ready = !active;
  assign busy_dst  = active ? dst_mask(cur) : '0;
  assign busy_src  = active ? src_mask(cur) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      cur     <= '0;
      sent    <= '0;
      recv    <= '0;
      lq_busy <= '0;
      lq_pf   <= '0;
      sq_head <= '0;
      sq_tail <= '0;
      sq_cnt  <= '0;
      for (int i = 0; i < LQ_N; i++) begin
        lq_row[i] <= '0;
        lq_uop[i] <= '0;
      end
      for (int i = 0; i < SQ_N; i++) sq[i] <= '0;
    end else begin
      if (iss_valid && iss_ready) begin
        active <= 1'b1;
        cur    <= iss_instr;
        sent   <= '0;
        recv   <= '0;
      end else if (active) begin
        if (dem_ld_go || sq_push) sent <= sent + 5'd1;
        recv <= recv_n;
        if (done) active <= 1'b0;
      end
      // LQ allocate and free (an answer never targets the entry sent this cycle)
      if (mem_rsp_valid) lq_busy[mem_rsp.tag] <= 1'b0;
      if (dem_ld_go || pf_go) begin
        lq_busy[lq_free] <= 1'b1;
        lq_pf[lq_free]   <= pf_go;
        lq_row[lq_free]  <= ROW_IW'(sent);
        lq_uop[lq_free]  <= pf_uop;
      end
      // SQ
      if (sq_push) begin
        sq[sq_tail] <= '{addr: row_addr, data: rr_data[1], mask: kmask};
        sq_tail     <= (sq_tail == SIW'(SQ_N-1)) ? '0 : sq_tail + 1'b1;
      end
      if (sq_pop) sq_head <= (sq_head == SIW'(SQ_N-1)) ? '0 : sq_head + 1'b1;
      sq_cnt <= sq_cnt + (SIW+1)'(sq_push) - (SIW+1)'(sq_pop);
    end
  end

`ifndef SYNTHESIS
  a_rsp_busy: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> lq_busy[mem_rsp.tag]) else $error("answer for a free LQ entry");
`endif
endmodule
