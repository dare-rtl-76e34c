// tb_mma_unit -- runs mma instructions of several shapes on the execution
// unit with a testbench register file and checks md = md + ms1*ms2^T inside
// the shape, md unchanged outside it, and the latency: done comes
// K/4 + M + N cycles after the start is accepted.
module tb_mma_unit;
  import dare_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, ready, busy, wb_valid, done;
  minstr_t instr, cur;
  logic [MREG_IW-1:0] rd_idx_a, rd_idx_b, rd_idx_c, wb_idx;
  mreg_t rd_a, rd_b, rd_c, wb_data;
  mreg_t regs [NUM_MREGS];
  assign rd_a = regs[rd_idx_a];
  assign rd_b = regs[rd_idx_b];
  assign rd_c = regs[rd_idx_c];

  mma_unit dut (.*);

  int checks = 0, failures = 0;

  function automatic logic [31:0] el(input mreg_t r, input int i, input int j);
    return r[i][32*j +: 32];
  endfunction

  task automatic one(input int m, input int kb, input int n, input int md, input int s1, input int s2);
    mreg_t exp;
    int t0, lat;
    for (int r = 0; r < NUM_MREGS; r++) for (int i = 0; i < 16; i++) regs[r][i] = {16{$urandom}};
    for (int r = 0; r < NUM_MREGS; r++) for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) regs[r][i][32*j +: 32] = $urandom;
    exp = regs[md];
    for (int i = 0; i < m; i++) for (int j = 0; j < n; j++) begin
      logic [31:0] s = el(regs[md], i, j);
      for (int k = 0; k < kb/4; k++) s += el(regs[s1], i, k) * el(regs[s2], j, k);
      exp[i][32*j +: 32] = s;
    end
    @(negedge clk);
    instr = '0;
    instr.op = OP_MMA; instr.md = 3'(md); instr.ms1 = 3'(s1); instr.ms2 = 3'(s2);
    instr.shape = '{m: 5'(m), k: 7'(kb), n: 5'(n)};
    start = 1'b1;
    checks++;
    if (!ready) failures++;
    @(negedge clk);
    start = 1'b0;
    t0 = 0;
    while (!done) begin @(negedge clk); t0++; end
    lat = t0 + 1;
    checks++;
    if (wb_data !== exp || wb_idx != 3'(md) || !wb_valid) begin
      failures++;
      $display("FAIL result m=%0d k=%0d n=%0d", m, kb, n);
    end
    checks++;
    if (lat != kb/4 + m + n) begin
      failures++;
      $display("FAIL latency %0d expected %0d", lat, kb/4 + m + n);
    end
  endtask

  initial begin
    start = 0; instr = '0;
    for (int r = 0; r < NUM_MREGS; r++) regs[r] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    one(16, 64, 16, 0, 1, 2);
    one(8, 32, 4, 3, 4, 5);
    one(1, 4, 1, 7, 7, 6);
    one(16, 64, 16, 2, 2, 2);
    one(5, 20, 11, 6, 0, 1);
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
