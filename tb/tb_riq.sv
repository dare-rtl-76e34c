// tb_riq -- the runahead issue queue with its DMU and filter, next to the
// VMR and its free list. The testbench stands in for the units and the
// cache: it holds issue back, takes every prefetch uop and answers it after
// a latency set by the address (slow below 0x2000, fast above). Checks:
// in-order issue only without RAW/WAW/WAR conflicts; uop addresses
// base + row*stride; only the tentative uop of each instruction until a slow
// answer grants the rest; a fast answer filters the instruction; an mgather
// whose address vector is loaded by an mld in the queue gets that mld woken
// (all its uops, VMR writes) and then prefetches the gathered rows from the
// VMR; the queue reports full at 32 entries.
module tb_riq;
  import dare_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic enq_valid, enq_ready, iss_valid, iss_ready, pf_valid, pf_ready;
  minstr_t enq_instr, iss_instr;
  logic [7:0] busy_dst, busy_src;
  pf_uop_t pf_uop;
  logic lq_send_en, ld_done_en;
  logic [LQ_IW-1:0] lq_send_idx;
  ld_done_t ld_done;
  logic [15:0] vmr_alloc, vmr_ready, vmr_dead, vmr_done, vmr_abort;
  logic [4:0] vmr_rows [16];
  logic [2:0] fl_alloc_n;
  logic [3:0] fl_idx [4];
  logic [4:0] fl_count;
  logic vmr_sent_en, vmr_wr_en, rel_valid;
  logic [3:0] vmr_sent_idx, vmr_rd_idx, vmr_rd_row, vmr_wr_idx, vmr_wr_row, rel_idx;
  logic [47:0] vmr_rd_data, vmr_wr_data;
  logic empty, ev_stall, ev_pred_miss, ev_pred_hit, ev_th_update, ev_chain, ev_chain_fail, ev_suppressed;
  logic [5:0] count;
  logic [15:0] threshold;

  riq dut (
    .clk, .rst_n, .enq_valid, .enq_ready, .enq_instr, .busy_dst, .busy_src,
    .iss_valid, .iss_ready, .iss_instr, .pf_valid, .pf_ready, .pf_uop,
    .lq_send_en, .lq_send_idx, .ld_done_en, .ld_done,
    .vmr_alloc, .vmr_rows, .fl_alloc_n, .fl_idx, .fl_count,
    .vmr_sent_en, .vmr_sent_idx, .vmr_rd_idx, .vmr_rd_row, .vmr_rd_data,
    .vmr_ready, .vmr_dead, .vmr_done, .vmr_abort,
    .empty, .count, .threshold, .ev_stall, .ev_pred_miss, .ev_pred_hit,
    .ev_th_update, .ev_chain, .ev_chain_fail, .ev_suppressed);

  vmr u_vmr (.clk, .rst_n, .alloc_mask(vmr_alloc), .alloc_rows(vmr_rows),
    .sent_en(vmr_sent_en), .sent_idx(vmr_sent_idx), .wr_en(vmr_wr_en), .wr_idx(vmr_wr_idx),
    .wr_row(vmr_wr_row), .wr_data(vmr_wr_data), .abort_mask(vmr_abort), .done_mask(vmr_done),
    .rd_idx(vmr_rd_idx), .rd_row(vmr_rd_row), .rd_data(vmr_rd_data), .ready(vmr_ready),
    .dead(vmr_dead), .rel_valid(rel_valid), .rel_idx(rel_idx));
  vmr_freelist #(.N(16), .MAXA(4)) u_fl (.clk, .rst_n, .alloc_n(fl_alloc_n), .alloc_idx(fl_idx),
    .count(fl_count), .rel_valid(rel_valid), .rel_idx(rel_idx));

  int checks = 0, failures = 0;
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- cache stand-in: log every uop, answer it later
  pf_uop_t     log_u [$];
  pf_uop_t     p_u   [$];
  int          p_due [$];
  int          p_lq  [$];
  int          now = 0, lqn = 0;
  assign pf_ready    = 1'b1;
  assign lq_send_en  = pf_valid && pf_ready;
  assign lq_send_idx = LQ_IW'(lqn);
  logic [47:0] memval [logic [47:0]];   // data returned for an address (first 48 bits)

  always @(posedge clk) begin
    now <= now + 1;
    if (pf_valid && pf_ready) begin
      log_u.push_back(pf_uop);
      p_u.push_back(pf_uop);
      p_due.push_back(now + ((pf_uop.addr < 48'h2000) ? 100 : 10));
      p_lq.push_back(lqn);
      lqn <= (lqn + 1) % LQ_DEPTH;
    end
  end
  always_comb begin
    ld_done_en = 1'b0;
    ld_done    = '0;
    for (int i = 0; i < p_u.size(); i++) begin
      if (!ld_done_en && p_due[i] <= now) begin
        ld_done_en       = 1'b1;
        ld_done.lq_idx   = LQ_IW'(p_lq[i]);
        ld_done.prefetch = 1'b1;
        ld_done.uop      = p_u[i];
        ld_done.rdata    = memval.exists(p_u[i].addr) ? ROW_W'(memval[p_u[i].addr]) : '0;
      end
    end
  end
  assign vmr_wr_en   = ld_done_en && ld_done.uop.vmr_we;
  assign vmr_wr_idx  = ld_done.uop.vmr_idx;
  assign vmr_wr_row  = ld_done.uop.row;
  assign vmr_wr_data = ld_done.rdata[47:0];
  always @(posedge clk) begin
    for (int i = 0; i < p_u.size(); i++)
      if (p_due[i] <= now) begin
        p_u.delete(i); p_due.delete(i); p_lq.delete(i);
        break;
      end
  end

  function automatic minstr_t mk(input op_e o, input int md, input int s1, input int s2,
                                 input int base, input int stride, input int m, input int sq);
    minstr_t x = '0;
    x.op = o; x.md = 3'(md); x.ms1 = 3'(s1); x.ms2 = 3'(s2); x.base = 48'(base);
    x.stride = 64'(stride); x.shape = '{m: 5'(m), k: 7'd64, n: 5'd16}; x.seq = SEQ_W'(sq);
    return x;
  endfunction
  task automatic enq(input minstr_t x);
    @(negedge clk);
    enq_valid = 1; enq_instr = x;
    #1 while (!enq_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    enq_valid = 0;
  endtask
  function automatic int count_addr(input logic [47:0] a);
    int c = 0;
    foreach (log_u[i]) if (log_u[i].addr == a) c++;
    return c;
  endfunction

  initial begin
    enq_valid = 0; enq_instr = '0; iss_ready = 0; busy_dst = 0; busy_src = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // slow mld (4 rows, stride 128), fast mst (4 rows), an mma using both
    enq(mk(OP_MLD, 1, 0, 0, 'h1000, 128, 4, 1));
    enq(mk(OP_MST, 0, 0, 2, 'h3000, 64, 4, 2));
    enq(mk(OP_MMA, 3, 1, 2, 0, 0, 16, 3));
    repeat (6) @(negedge clk);
    chk(log_u.size() == 2 && log_u[0].addr == 'h1000 && log_u[0].tentative
        && log_u[1].addr == 'h3000 && log_u[1].tentative, "tentative uops first, oldest first");
    repeat (120) @(negedge clk);
    chk(count_addr('h1080) == 1 && count_addr('h1100) == 1 && count_addr('h1180) == 1,
        "slow tentative uop grants rows 1..3 of mld");
    chk(count_addr('h3040) == 0 && log_u.size() == 5, "fast tentative uop filters the mst");
    // issue with conflicts: m1 being written elsewhere blocks mld m1 (WAW)
    busy_dst = 8'h02; iss_ready = 1; #1;
    chk(!iss_valid && ev_stall, "WAW blocks the head");
    busy_dst = 8'h00; busy_src = 8'h02; #1;
    chk(!iss_valid, "WAR blocks the head");
    busy_src = 8'h00; #1;
    chk(iss_valid && iss_instr.op == OP_MLD && iss_instr.md == 1, "head issues when free");
    @(negedge clk);
    busy_dst = 8'h04; #1;   // m2 still being written: RAW for the mst
    chk(!iss_valid && iss_instr.op == OP_MST, "RAW blocks mst");
    busy_dst = 8'h00; #1;
    chk(iss_valid, "mst issues");
    @(negedge clk); @(negedge clk);
    chk(empty, "queue drained");
    iss_ready = 0;
    // runahead chain: mld m4 <- address vector, mgather m5,(m4)
    for (int r = 0; r < 4; r++) memval[48'h4000 + 48'(64*r)] = 48'h1400 + 48'(256*r);
    enq(mk(OP_MLD, 4, 0, 0, 'h4000, 64, 4, 4));
    enq(mk(OP_MGATHER, 5, 4, 0, 0, 0, 4, 5));
    repeat (60) @(negedge clk);
    chk(count_addr('h4040) == 1 && count_addr('h40c0) == 1, "woken mld sends every row");
    chk(count_addr('h1400) == 1, "mgather tentative uop from the VMR address");
    repeat (120) @(negedge clk);
    chk(count_addr('h1500) == 1 && count_addr('h1700) == 1, "mgather granted by slow answer, all rows");
    // leave: issue both, the VMR entry returns to the free list
    iss_ready = 1;
    repeat (4) @(negedge clk);
    chk(empty && fl_count == 16, "VMR entry released");
    iss_ready = 0;
    // fill the queue
    for (int i = 0; i < 32; i++) enq(mk(OP_MMA, 1, 2, 3, 0, 0, 16, 10 + i));
    @(negedge clk); enq_valid = 1; enq_instr = mk(OP_MMA, 1, 2, 3, 0, 0, 16, 50); #1;
    chk(!enq_ready && count == 32, "full at 32 entries");
    enq_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
