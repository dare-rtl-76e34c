// tb_vmr_freelist -- allocates and releases VMR entries at random against a
// queue model: checks the order in which free indices are offered, the free
// count, and that all 16 entries are free after reset.
module tb_vmr_freelist;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  localparam int N = 16, MAXA = 4;
  logic [2:0] alloc_n;
  logic [3:0] alloc_idx [MAXA];
  logic [4:0] count;
  logic rel_valid;
  logic [3:0] rel_idx;
  vmr_freelist #(.N(N), .MAXA(MAXA)) dut (.*);

  int q [$];
  int held [$];
  int checks = 0, failures = 0;

  initial begin
    alloc_n = 0; rel_valid = 0; rel_idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) q.push_back(i);
    #1;
    for (int it = 0; it < 500; it++) begin
      int na;
      checks++;
      if (count != 5'(q.size())) begin failures++; $display("FAIL count %0d vs %0d", count, q.size()); end
      for (int i = 0; i < MAXA && i < q.size(); i++) begin
        checks++;
        if (alloc_idx[i] != 4'(q[i])) begin failures++; $display("FAIL idx[%0d]=%0d exp %0d", i, alloc_idx[i], q[i]); end
      end
      na = $urandom_range(MAXA, 0);
      if (na > q.size()) na = q.size();
      alloc_n = 3'(na);
      rel_valid = (held.size() > 0) && ($urandom_range(1, 0) == 1);
      if (rel_valid) begin
        int k;
        k = $urandom_range(held.size() - 1, 0);
        rel_idx = 4'(held[k]);
        held.delete(k);
      end
      @(negedge clk);
      for (int i = 0; i < na; i++) held.push_back(q.pop_front());
      if (rel_valid) q.push_back(int'(rel_idx));
      alloc_n = 0; rel_valid = 0;
      #1;
    end
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
