// tb_lsu -- the load/store unit against the behavioural cache model and a
// testbench register file. Checks: mld writes each row of the tile with the
// bytes beyond matrixK cleared; mst and mscatter write exactly K bytes per
// row to base + row*stride or to the per-row addresses held in ms1;
// mgather loads from those addresses; busy masks during an instruction;
// prefetch uops return their data to the VMR port when asked; every load
// sent is answered once with the same LQ index; a demand load after stores
// waits for the store queue to drain and still sees the stored data.
module tb_lsu;
  import dare_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic iss_valid, iss_ready, done, pf_valid, pf_ready;
  minstr_t iss_instr;
  logic [7:0] busy_dst, busy_src;
  logic [2:0] rr_idx [2];
  logic [3:0] rr_row [2];
  row_t rr_data [2];
  logic rw_en;
  logic [2:0] rw_idx;
  logic [3:0] rw_row;
  row_t rw_data;
  pf_uop_t pf_uop;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  logic lq_send_en, ld_done_en, vmr_wr_en, sq_empty, ev_sq_wait, ev_lq_full;
  logic [LQ_IW-1:0] lq_send_idx;
  ld_done_t ld_done;
  logic [3:0] vmr_wr_idx, vmr_wr_row;
  logic [47:0] vmr_wr_data;
  lsu dut (.*);

  llc_model #(.MEM_BYTES(65536), .READY_PCT(60)) u_llc (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  mreg_t regs [8];
  always_comb for (int p = 0; p < 2; p++) rr_data[p] = regs[rr_idx[p]][rr_row[p]];
  always @(posedge clk) if (rw_en) regs[rw_idx][rw_row] <= rw_data;

  int checks = 0, failures = 0, n_sqwait = 0, n_vmrw = 0;
  int outstanding [LQ_DEPTH];
  always @(posedge clk) begin
    n_sqwait += int'(ev_sq_wait);
    n_vmrw   += int'(vmr_wr_en);
    if (lq_send_en) outstanding[lq_send_idx]++;
    if (ld_done_en) begin
      outstanding[ld_done.lq_idx]--;
      if (outstanding[ld_done.lq_idx] < 0) begin failures++; $display("FAIL answer without send"); end
    end
  end
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [7:0] img [65536];
  task automatic fill(input int a, input int n);
    for (int i = 0; i < n; i++) begin
      img[(a + i) % 65536] = 8'($urandom);
      u_llc.mem[(a + i) % 65536] = img[(a + i) % 65536];
    end
  endtask
  function automatic row_t img_row(input int a, input int kb);
    row_t r = '0;
    for (int b = 0; b < kb; b++) r[8*b +: 8] = img[(a + b) % 65536];
    return r;
  endfunction

  task automatic run(input op_e o, input int md, input int s1, input int s2, input int base,
                     input int stride, input int m, input int kb);
    minstr_t x = '0;
    x.op = o; x.md = 3'(md); x.ms1 = 3'(s1); x.ms2 = 3'(s2); x.base = 48'(base);
    x.stride = 64'(stride); x.shape = '{m: 5'(m), k: 7'(kb), n: 5'd16};
    @(negedge clk);
    iss_valid = 1; iss_instr = x; #1;
    chk(iss_ready, "ready for a new instruction");
    @(negedge clk);
    iss_valid = 0; #1;
    chk(busy_dst == dst_mask(x) && busy_src == src_mask(x), "busy masks");
    while (!done) begin @(negedge clk); #1; end
    @(negedge clk);
  endtask

  initial begin
    iss_valid = 0; iss_instr = '0; pf_valid = 0; pf_uop = '0;
    for (int i = 0; i < LQ_DEPTH; i++) outstanding[i] = 0;
    for (int r = 0; r < 8; r++) regs[r] = '0;
    for (int i = 0; i < 65536; i++) img[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    fill('h1000, 4096);
    // mld m1: 5 rows, 40 bytes, stride 200
    run(OP_MLD, 1, 0, 0, 'h1000, 200, 5, 40);
    for (int r = 0; r < 5; r++) chk(regs[1][r] == img_row('h1000 + 200*r, 40), "mld row");
    chk(regs[1][5] == '0, "row beyond M untouched");
    // address vector in m2 (first 48 bits of each row), mgather m3,(m2)
    for (int r = 0; r < 16; r++) regs[2][r] = ROW_W'(48'h1000 + 48'(64 * ((r * 7) % 16)));
    run(OP_MGATHER, 3, 2, 0, 0, 0, 16, 64);
    for (int r = 0; r < 16; r++) chk(regs[3][r] == img_row('h1000 + 64*((r*7) % 16), 64), "mgather row");
    // mst m3 -> 0x3000 stride 64, 12 bytes per row
    run(OP_MST, 0, 0, 3, 'h3000, 64, 16, 12);
    for (int r = 0; r < 16; r++) for (int b = 0; b < 12; b++) img['h3000 + 64*r + b] = regs[3][r][8*b +: 8];
    // mld immediately behind the stores reads them back
    run(OP_MLD, 4, 0, 0, 'h3000, 64, 16, 16);
    for (int r = 0; r < 16; r++) chk(regs[4][r] == img_row('h3000 + 64*r, 16), "load after store");
    chk(n_sqwait > 0, "demand load waited for the store queue");
    // mscatter m1 rows to addresses in m5
    for (int r = 0; r < 16; r++) regs[5][r] = ROW_W'(48'h5000 + 48'(128 * (15 - r)));
    run(OP_MSCATTER, 0, 5, 1, 0, 0, 4, 64);
    repeat (10) @(negedge clk);
    for (int r = 0; r < 4; r++) for (int b = 0; b < 64; b++) begin
      checks++;
      if (u_llc.mem['h5000 + 128*(15 - r) + b] !== regs[1][r][8*b +: 8]) failures++;
    end
    chk(u_llc.mem['h5000 + 128*11 + 64] === 8'h00, "no bytes beyond the row");
    // prefetch uops: one with a VMR destination
    u_llc.poke64('h6000, 64'h0000_1234_5678_9abc);
    @(negedge clk);
    pf_valid = 1; pf_uop = '0; pf_uop.addr = 48'h6000; pf_uop.vmr_we = 1; pf_uop.vmr_idx = 4'd9; pf_uop.row = 4'd3;
    #1 while (!pf_ready) begin @(negedge clk); #1; end
    @(negedge clk); pf_valid = 0;
    while (!vmr_wr_en) begin @(negedge clk); #1; end
    chk(vmr_wr_idx == 9 && vmr_wr_row == 3 && vmr_wr_data == 48'h1234_5678_9abc && ld_done.prefetch,
        "prefetch answer written to the VMR");
    chk(regs[0] == '0, "prefetch does not touch the registers");
    repeat (150) @(negedge clk);
    begin
      int left;
      left = 0;
      for (int i = 0; i < LQ_DEPTH; i++) left += outstanding[i];
      chk(left == 0, "every load answered");
    end
    chk(sq_empty, "store queue drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
