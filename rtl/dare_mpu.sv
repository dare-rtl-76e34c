// dare_mpu -- the DARE matrix processing unit.
//
// A matrix co-processor next to a host CPU. The host dispatches DARE
// instructions (with the values of their general-purpose source registers)
// non-speculatively on the `in_*` handshake. They are decoded (decoder with
// the matrixM/K/N shape CSRs) and written into the runahead issue queue
// (RIQ). The RIQ issues its head in order, one per cycle, once it has no
// register conflict with the instructions still in flight: memory
// instructions go to the load/store unit (LSU), mma to the systolic-array
// execution unit (mma_unit); the two run in parallel, so instructions
// complete out of order. There is no register renaming.
//
// While instructions wait in the RIQ, memory instructions are split into
// row-sized prefetch uops that the runahead filter unit (inside the RIQ)
// arbitrates and filters before the LSU sends them to the LLC: only the
// first, tentative, uop of an instruction goes out until its latency shows
// an LLC miss or the instruction feeds a VMR entry. For an mgather the
// dependency management unit pre-executes the chain that produces its
// base-address vector, keeping the vectors in the vector matrix register
// (VMR, with its free list), so the gather's rows can be prefetched too.
//
// Ports: host dispatch (in_valid/in_ready, instruction word, rs1/rs2
// values); LLC port (one row-wide request per cycle, mem_req_valid/ready;
// load answers mem_rsp_valid with the request's tag, any order, no
// backpressure); status: idle when the queue, the units and the store
// queue are empty, the
// current classifier threshold and one-cycle event pulses.
// The block structure follows Fig. 4(a) of the design description; port
// formats and the issue width of one per cycle are this design's choices.
//
// Lint note: rst_n is an asynchronous reset and also the `disable iff`
// condition of the assertions inside the LSU, VMR and free list, which lint
// reports, through those instances, as a net used
// both synchronously and asynchronously; it is not a circuit problem.
module dare_mpu
  import dare_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // host CPU dispatch
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [31:0]     in_instr,
  input  logic [XLEN-1:0] in_rs1,
  input  logic [XLEN-1:0] in_rs2,
  // last-level cache
  output logic            mem_req_valid,
  input  logic            mem_req_ready,
  output mem_req_t        mem_req,
  input  logic            mem_rsp_valid,
  input  mem_rsp_t        mem_rsp,
  // status
  output logic            idle,
  output logic            illegal,
  output logic [TS_W-1:0] threshold,
  output dare_events_t    ev
);
  // ---------------- decode
  logic    d_valid, d_ready;
  minstr_t d_instr;
  shape_t  csr_shape;

  dare_decoder u_dec (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .in_instr  (in_instr),
    .in_rs1    (in_rs1),
    .in_rs2    (in_rs2),
    .out_valid (d_valid),
    .out_ready (d_ready),
    .out_instr (d_instr),
    .csr_shape (csr_shape),
    .illegal   (illegal)
  );

  // ---------------- RIQ (with DMU and RFU)
  logic [NUM_MREGS-1:0] busy_dst, busy_src;
  logic    iss_valid, iss_ready;
  minstr_t iss_instr;
  logic    pf_valid, pf_ready;
  pf_uop_t pf_uop;
  logic             lq_send_en, ld_done_en;
  logic [LQ_IW-1:0] lq_send_idx;
  ld_done_t         ld_done;
  logic [VMR_ENTRIES-1:0] vmr_alloc, vmr_ready, vmr_dead, vmr_done, vmr_abort;
  logic [ROW_IW:0]        vmr_rows [VMR_ENTRIES];
  logic [$clog2(MAX_CHAIN):0] fl_alloc_n;
  logic [VMR_IW-1:0]      fl_idx [MAX_CHAIN];
  logic [VMR_IW:0]        fl_count;
  logic                   vmr_sent_en, vmr_wr_en, vmr_rel_valid;
  logic [VMR_IW-1:0]      vmr_sent_idx, vmr_rd_idx, vmr_wr_idx, vmr_rel_idx;
  logic [ROW_IW-1:0]      vmr_rd_row, vmr_wr_row;
  logic [VMR_W-1:0]       vmr_rd_data, vmr_wr_data;
  logic                   riq_empty;
  logic [RIQ_IW:0]        riq_count;

  riq u_riq (
    .clk           (clk),
    .rst_n         (rst_n),
    .enq_valid     (d_valid),
    .enq_ready     (d_ready),
    .enq_instr     (d_instr),
    .busy_dst      (busy_dst),
    .busy_src      (busy_src),
    .iss_valid     (iss_valid),
    .iss_ready     (iss_ready),
    .iss_instr     (iss_instr),
    .pf_valid      (pf_valid),
    .pf_ready      (pf_ready),
    .pf_uop        (pf_uop),
    .lq_send_en    (lq_send_en),
    .lq_send_idx   (lq_send_idx),
    .ld_done_en    (ld_done_en),
    .ld_done       (ld_done),
    .vmr_alloc     (vmr_alloc),
    .vmr_rows      (vmr_rows),
    .fl_alloc_n    (fl_alloc_n),
    .fl_idx        (fl_idx),
    .fl_count      (fl_count),
    .vmr_sent_en   (vmr_sent_en),
    .vmr_sent_idx  (vmr_sent_idx),
    .vmr_rd_idx    (vmr_rd_idx),
    .vmr_rd_row    (vmr_rd_row),
    .vmr_rd_data   (vmr_rd_data),
    .vmr_ready     (vmr_ready),
    .vmr_dead      (vmr_dead),
    .vmr_done      (vmr_done),
    .vmr_abort     (vmr_abort),
    .empty         (riq_empty),
    .count         (riq_count),
    .threshold     (threshold),
    .ev_stall      (ev.hazard_stall),
    .ev_pred_miss  (ev.pred_miss),
    .ev_pred_hit   (ev.pred_hit),
    .ev_th_update  (ev.th_update),
    .ev_chain      (ev.chain_wake),
    .ev_chain_fail (ev.chain_fail),
    .ev_suppressed (ev.pf_suppressed)
  );

  // ---------------- VMR and its free list
  vmr u_vmr (
    .clk        (clk),
    .rst_n      (rst_n),
    .alloc_mask (vmr_alloc),
    .alloc_rows (vmr_rows),
    .sent_en    (vmr_sent_en),
    .sent_idx   (vmr_sent_idx),
    .wr_en      (vmr_wr_en),
    .wr_idx     (vmr_wr_idx),
    .wr_row     (vmr_wr_row),
    .wr_data    (vmr_wr_data),
    .abort_mask (vmr_abort),
    .done_mask  (vmr_done),
    .rd_idx     (vmr_rd_idx),
    .rd_row     (vmr_rd_row),
    .rd_data    (vmr_rd_data),
    .ready      (vmr_ready),
    .dead       (vmr_dead),
    .rel_valid  (vmr_rel_valid),
    .rel_idx    (vmr_rel_idx)
  );

  vmr_freelist #(.N(VMR_ENTRIES), .MAXA(MAX_CHAIN)) u_fl (
    .clk       (clk),
    .rst_n     (rst_n),
    .alloc_n   (fl_alloc_n),
    .alloc_idx (fl_idx),
    .count     (fl_count),
    .rel_valid (vmr_rel_valid),
    .rel_idx   (vmr_rel_idx)
  );

  // ---------------- issue routing
  logic    sq_empty;
  logic    to_lsu, lsu_ready, mma_ready, mma_busy, lsu_done, mma_done;
  minstr_t mma_cur;
  logic [NUM_MREGS-1:0] lsu_dst, lsu_src;
  assign to_lsu    = is_mem(iss_instr.op);
  assign iss_ready = to_lsu ? lsu_ready : mma_ready;
  assign busy_dst  = lsu_dst | (mma_busy ? dst_mask(mma_cur) : '0);
  assign busy_src  = lsu_src | (mma_busy ? src_mask(mma_cur) : '0);

  // ---------------- matrix register file
  logic [MREG_IW-1:0] rr_idx [2];
  logic [ROW_IW-1:0]  rr_row [2];
  row_t               rr_data [2];
  logic [MREG_IW-1:0] fr_idx [3];
  mreg_t              fr_data [3];
  logic               rw_en, fw_en;
  logic [MREG_IW-1:0] rw_idx, fw_idx;
  logic [ROW_IW-1:0]  rw_row;
  row_t               rw_data;
  mreg_t              fw_data;

  mreg_file u_mrf (
    .clk     (clk),
    .rst_n   (rst_n),
    .rr_idx  (rr_idx),
    .rr_row  (rr_row),
    .rr_data (rr_data),
    .fr_idx  (fr_idx),
    .fr_data (fr_data),
    .rw_en   (rw_en),
    .rw_idx  (rw_idx),
    .rw_row  (rw_row),
    .rw_data (rw_data),
    .fw_en   (fw_en),
    .fw_idx  (fw_idx),
    .fw_data (fw_data)
  );

  // ---------------- LSU
  lsu u_lsu (
    .clk           (clk),
    .rst_n         (rst_n),
    .iss_valid     (iss_valid && to_lsu),
    .iss_ready     (lsu_ready),
    .iss_instr     (iss_instr),
    .busy_dst      (lsu_dst),
    .busy_src      (lsu_src),
    .done          (lsu_done),
    .rr_idx        (rr_idx),
    .rr_row        (rr_row),
    .rr_data       (rr_data),
    .rw_en         (rw_en),
    .rw_idx        (rw_idx),
    .rw_row        (rw_row),
    .rw_data       (rw_data),
    .pf_valid      (pf_valid),
    .pf_ready      (pf_ready),
    .pf_uop        (pf_uop),
    .mem_req_valid (mem_req_valid),
    .mem_req_ready (mem_req_ready),
    .mem_req       (mem_req),
    .mem_rsp_valid (mem_rsp_valid),
    .mem_rsp       (mem_rsp),
    .lq_send_en    (lq_send_en),
    .lq_send_idx   (lq_send_idx),
    .ld_done_en    (ld_done_en),
    .ld_done       (ld_done),
    .vmr_wr_en     (vmr_wr_en),
    .vmr_wr_idx    (vmr_wr_idx),
    .vmr_wr_row    (vmr_wr_row),
    .vmr_wr_data   (vmr_wr_data),
    .sq_empty      (sq_empty),
    .ev_sq_wait    (ev.sq_wait),
    .ev_lq_full    (ev.lq_full)
  );

  // ---------------- execution unit
  mma_unit u_exe (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (iss_valid && !to_lsu),
    .instr    (iss_instr),
    .ready    (mma_ready),
    .busy     (mma_busy),
    .cur      (mma_cur),
    .rd_idx_a (fr_idx[0]),
    .rd_idx_b (fr_idx[1]),
    .rd_idx_c (fr_idx[2]),
    .rd_a     (fr_data[0]),
    .rd_b     (fr_data[1]),
    .rd_c     (fr_data[2]),
    .wb_valid (fw_en),
    .wb_idx   (fw_idx),
    .wb_data  (fw_data),
    .done     (mma_done)
  );

  assign ev.pf_sent    = pf_valid && pf_ready;
  assign ev.vmr_write  = vmr_wr_en;
  assign ev.vmr_release = vmr_rel_valid;
  assign ev.riq_full   = d_valid && !d_ready;
  assign ev.mma_done   = mma_done;
  assign ev.mem_done   = lsu_done;
  assign idle = riq_empty && lsu_ready && mma_ready && sq_empty;

  logic unused;
  assign unused = ^{csr_shape, riq_count};
endmodule
