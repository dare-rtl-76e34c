// tb_timestamp_array -- sends loads on random entries at known cycles and
// checks that the latency read back equals the cycles elapsed since each
// entry's send, including across the 16-bit counter wrap.
module tb_timestamp_array;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic send_en;
  logic [5:0] send_idx, recv_idx;
  logic [15:0] latency, now;
  timestamp_array #(.ENTRIES(48), .W(16)) dut (.*);

  int sent_at [48];
  int cyc = 0;
  int checks = 0, failures = 0;
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  initial begin
    send_en = 0; send_idx = 0; recv_idx = 0;
    for (int i = 0; i < 48; i++) sent_at[i] = -1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 70000; it++) begin
      @(negedge clk);
      send_en = ($urandom_range(3, 0) == 0);
      send_idx = 6'($urandom_range(47, 0));
      recv_idx = 6'($urandom_range(47, 0));
      #1;
      if (sent_at[recv_idx] >= 0 && !(send_en && send_idx == recv_idx) && (it % 7 == 0)) begin
        checks++;
        if (latency != 16'(cyc - sent_at[recv_idx])) begin
          failures++;
          if (failures < 5) $display("FAIL entry %0d latency %0d exp %0d", recv_idx, latency, cyc - sent_at[recv_idx]);
        end
      end
      if (send_en) sent_at[send_idx] = cyc;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
