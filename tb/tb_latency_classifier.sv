// tb_latency_classifier -- feeds latency samples from changing hit/miss
// distributions and compares the threshold with a reference model of the
// three-step rule (32-sample window, 8-cycle bins, peaks above 20 %,
// margin of 4 bins, valley lower edge + 32 slack, initial 64); also checks
// the miss query against the threshold.
module tb_latency_classifier;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic sample_en, q_miss, th_update;
  logic [15:0] sample_lat, q_lat, threshold;
  latency_classifier dut (.*);

  int win [$];
  int ref_th = 64;
  int checks = 0, failures = 0, n_upd = 0;

  function automatic void model_update();
    int h [32];
    int lo = -1, hi = -1, vbin, vmin;
    for (int b = 0; b < 32; b++) h[b] = 0;
    foreach (win[i]) h[(win[i] / 8 > 31) ? 31 : win[i] / 8]++;
    for (int b = 0; b < 32; b++)
      if (h[b] * 100 > 20 * win.size()) begin
        if (lo < 0) lo = b;
        hi = b;
      end
    if (lo >= 0 && hi - lo > 4) begin
      vmin = 1000; vbin = lo;
      for (int b = lo + 1; b < hi; b++) if (h[b] < vmin) begin vmin = h[b]; vbin = b; end
      ref_th = vbin * 8 + 32;
      n_upd++;
    end
  endfunction

  task automatic feed(input int lat);
    @(negedge clk);
    sample_en = 1'b1; sample_lat = 16'(lat);
    @(negedge clk);
    sample_en = 1'b0;
    win.push_back(lat);
    if (win.size() > 32) void'(win.pop_front());
    model_update();
    @(negedge clk);
    checks++;
    if (int'(threshold) != ref_th) begin
      failures++;
      if (failures < 8) $display("FAIL threshold %0d exp %0d (window %0d)", threshold, ref_th, win.size());
    end
    q_lat = 16'($urandom_range(300, 0));
    #1;
    checks++;
    if (q_miss != (int'(q_lat) > ref_th)) failures++;
  endtask

  initial begin
    sample_en = 0; sample_lat = 0; q_lat = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 40; i++) feed($urandom_range(25, 18));                   // hits only
    for (int i = 0; i < 80; i++) feed(($urandom_range(9, 0) < 6) ? $urandom_range(25, 18) : $urandom_range(120, 100));
    for (int i = 0; i < 80; i++) feed(($urandom_range(9, 0) < 5) ? $urandom_range(70, 60) : $urandom_range(400, 180));
    for (int i = 0; i < 60; i++) feed(($urandom_range(9, 0) < 7) ? $urandom_range(40, 30) : $urandom_range(75, 60));  // peaks too close
    checks++;
    if (n_upd == 0) begin failures++; $display("FAIL no threshold update exercised"); end
    $display("final threshold %0d, %0d model updates", threshold, n_upd);
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
