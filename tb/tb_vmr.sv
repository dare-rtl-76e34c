// tb_vmr -- exercises the vector matrix register: allocation, per-row writes
// and reads of 48-bit addresses, the ready flag once all rows are filled,
// release only after all sent rows came back and the consumer is done, and
// abort (dead entry, released once its outstanding rows are back).
module tb_vmr;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [15:0] alloc_mask, abort_mask, done_mask, ready, dead;
  logic [4:0]  alloc_rows [16];
  logic sent_en, wr_en, rel_valid;
  logic [3:0] sent_idx, wr_idx, rd_idx, rel_idx, wr_row, rd_row;
  logic [47:0] wr_data, rd_data;
  vmr dut (.*);

  int checks = 0, failures = 0;
  logic [47:0] model [16][16];
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic idle_inputs();
    alloc_mask = 0; abort_mask = 0; done_mask = 0; sent_en = 0; wr_en = 0;
  endtask

  initial begin
    idle_inputs();
    for (int e = 0; e < 16; e++) alloc_rows[e] = 5'd16;
    sent_idx = 0; wr_idx = 0; wr_row = 0; wr_data = 0; rd_idx = 0; rd_row = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // allocate entries 3 (16 rows) and 9 (4 rows)
    alloc_rows[9] = 5'd4;
    alloc_mask = 16'h0208;
    @(negedge clk); idle_inputs();
    chk(ready == 0 && dead == 0 && !rel_valid, "fresh entries not ready");
    // fill entry 3 row by row; entry 9 gets 4 rows interleaved
    for (int r = 0; r < 16; r++) begin
      sent_en = 1; sent_idx = 3;
      @(negedge clk); idle_inputs();
      wr_en = 1; wr_idx = 3; wr_row = 4'(r); wr_data = {$urandom, 16'($urandom)}; model[3][r] = wr_data;
      @(negedge clk); idle_inputs();
      if (r < 4) begin
        sent_en = 1; sent_idx = 9;
        @(negedge clk); idle_inputs();
        wr_en = 1; wr_idx = 9; wr_row = 4'(r); wr_data = {$urandom, 16'($urandom)}; model[9][r] = wr_data;
        @(negedge clk); idle_inputs();
      end
      if (r == 3) begin #1 chk(ready[9] && !ready[3], "4-row entry ready, 16-row not yet"); end
    end
    #1 chk(ready[3], "entry 3 ready after 16 rows");
    for (int r = 0; r < 16; r++) begin
      rd_idx = 3; rd_row = 4'(r); #1;
      chk(rd_data == model[3][r], "read back entry 3");
    end
    rd_idx = 9; rd_row = 2; #1 chk(rd_data == model[9][2], "read back entry 9");
    chk(!rel_valid, "no release before consumer done");
    // consumer of 9 done -> release 9
    @(negedge clk); done_mask = 16'h0200; @(negedge clk); idle_inputs(); #1;
    chk(rel_valid && rel_idx == 9, "release entry 9");
    @(negedge clk); #1;
    chk(!rel_valid && !ready[9], "entry 9 freed");
    // abort: allocate 5, send 2 rows, abort, consumer done; release only after both rows back
    alloc_rows[5] = 5'd16; alloc_mask = 16'h0020; @(negedge clk); idle_inputs();
    sent_en = 1; sent_idx = 5; @(negedge clk); sent_en = 1; @(negedge clk); idle_inputs();
    abort_mask = 16'h0020; done_mask = 16'h0020; @(negedge clk); idle_inputs(); #1;
    chk(dead[5] && !ready[5], "aborted entry dead");
    chk(!(rel_valid && rel_idx == 5), "dead entry held while rows outstanding");
    wr_en = 1; wr_idx = 5; wr_row = 0; @(negedge clk); idle_inputs(); #1;
    chk(!(rel_valid && rel_idx == 5), "still one row outstanding");
    wr_en = 1; wr_idx = 5; wr_row = 1; @(negedge clk); idle_inputs(); #1;
    chk(rel_valid && rel_idx == 5, "dead entry released when drained");
    // entry 3 done -> released
    @(negedge clk); done_mask = 16'h0008; @(negedge clk); idle_inputs(); #1;
    chk(rel_valid && rel_idx == 3, "release entry 3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
