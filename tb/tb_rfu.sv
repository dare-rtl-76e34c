// tb_rfu -- checks the tentative-uop filter: oldest-first selection from the
// queue head, suppression of !granted && TentativeSent, granting by a
// long (miss) latency or by a wake, a short (hit) latency leaving the entry
// filtered, the sequence-tag check and clearing on reallocation.
module tb_rfu;
  import dare_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic alloc_en, sel_valid, pf_fire, lq_send_en, ld_done_en, th_update, ev_pred_miss, ev_pred_hit;
  logic [4:0] alloc_idx, head, sel_idx;
  logic [SEQ_W-1:0] alloc_seq;
  logic [31:0] wake_mask, cand, granted, tent_sent;
  logic [LQ_IW-1:0] lq_send_idx;
  ld_done_t ld_done;
  logic [TS_W-1:0] threshold;
  rfu dut (.*);

  int checks = 0, failures = 0, n_miss = 0, n_hit = 0;
  always @(posedge clk) begin n_miss += int'(ev_pred_miss); n_hit += int'(ev_pred_hit); end
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (sel_valid=%0d sel=%0d)", what, sel_valid, sel_idx); end
  endtask
  task automatic clr();
    alloc_en = 0; wake_mask = 0; pf_fire = 0; lq_send_en = 0; ld_done_en = 0; ld_done = '0;
  endtask
  task automatic alloc(input int i, input int s);
    @(negedge clk); clr(); alloc_en = 1; alloc_idx = 5'(i); alloc_seq = SEQ_W'(s);
    @(negedge clk); clr();
  endtask
  task automatic fire();
    pf_fire = 1; @(negedge clk); clr(); #1;
  endtask
  // a uop of entry i sent on LQ entry q, answered `lat` cycles later
  task automatic roundtrip(input int i, input int s, input int q, input int lat);
    lq_send_en = 1; lq_send_idx = LQ_IW'(q);
    @(negedge clk); clr();
    repeat (lat - 1) @(negedge clk);
    ld_done_en = 1; ld_done.lq_idx = LQ_IW'(q); ld_done.prefetch = 1;
    ld_done.uop.riq_idx = 5'(i); ld_done.uop.seq = SEQ_W'(s); ld_done.uop.tentative = 1;
    @(negedge clk); clr(); #1;
  endtask

  initial begin
    clr(); alloc_idx = 0; alloc_seq = 0; head = 0; cand = 0; lq_send_idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4; i++) alloc(i, 10 + i);
    cand = 32'hF; #1;
    chk(sel_valid && sel_idx == 0, "oldest first");
    fire(); chk(sel_valid && sel_idx == 1 && tent_sent[0], "entry 0 suppressed after tentative");
    fire(); fire(); fire();
    chk(!sel_valid, "all four suppressed");
    roundtrip(0, 10, 5, 100);
    chk(granted[0] && n_miss == 1, "slow tentative uop grants");
    chk(sel_valid && sel_idx == 0, "granted entry sends again");
    roundtrip(1, 11, 6, 12);
    chk(!granted[1] && n_hit == 1, "fast tentative uop filtered");
    cand = 32'hE; #1;
    chk(!sel_valid, "hit entry stays suppressed");
    @(negedge clk); wake_mask = 32'h4; @(negedge clk); clr(); #1;
    chk(granted[2] && sel_valid && sel_idx == 2, "wake grants");
    roundtrip(3, 99, 7, 120);
    chk(!granted[3], "stale sequence tag ignored");
    // head moved to 2: entry 1 (now the youngest) loses against entry 2
    alloc(1, 21); head = 2; cand = 32'h6; #1;
    chk(!granted[1] && !tent_sent[1], "reallocation clears flags");
    chk(sel_valid && sel_idx == 2, "age counted from head");
    cand = 32'h2; #1;
    chk(sel_valid && sel_idx == 1, "fresh entry may send its tentative uop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
