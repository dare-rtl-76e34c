// tb_mreg_file -- random row and whole-register writes against a model of
// the eight matrix registers; checks all five read ports and the reset value.
module tb_mreg_file;
  import dare_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [MREG_IW-1:0] rr_idx [2];
  logic [ROW_IW-1:0]  rr_row [2];
  row_t               rr_data [2];
  logic [MREG_IW-1:0] fr_idx [3];
  mreg_t              fr_data [3];
  logic rw_en, fw_en;
  logic [MREG_IW-1:0] rw_idx, fw_idx;
  logic [ROW_IW-1:0] rw_row;
  row_t rw_data;
  mreg_t fw_data;
  mreg_file dut (.*);

  mreg_t model [NUM_MREGS];
  int checks = 0, failures = 0;

  function automatic row_t rnd_row();
    row_t r;
    for (int w = 0; w < ROW_W/32; w++) r[32*w +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    rw_en = 0; fw_en = 0; rw_idx = 0; fw_idx = 0; rw_row = 0; rw_data = '0; fw_data = '0;
    for (int p = 0; p < 2; p++) begin rr_idx[p] = '0; rr_row[p] = '0; end
    for (int p = 0; p < 3; p++) fr_idx[p] = '0;
    for (int r = 0; r < NUM_MREGS; r++) model[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int it = 0; it < 400; it++) begin
      rw_en  = $urandom_range(1, 0);
      rw_idx = 3'($urandom); rw_row = 4'($urandom); rw_data = rnd_row();
      fw_en  = ($urandom_range(3, 0) == 0);
      fw_idx = 3'($urandom);
      if (fw_en && rw_en && fw_idx == rw_idx) fw_idx = fw_idx + 1;
      for (int i = 0; i < MROWS; i++) fw_data[i] = rnd_row();
      @(negedge clk);
      if (fw_en) model[fw_idx] = fw_data;
      if (rw_en) model[rw_idx][rw_row] = rw_data;
      rw_en = 0; fw_en = 0;
      for (int p = 0; p < 2; p++) begin rr_idx[p] = 3'($urandom); rr_row[p] = 4'($urandom); end
      for (int p = 0; p < 3; p++) fr_idx[p] = 3'($urandom);
      #1;
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rr_data[p] !== model[rr_idx[p]][rr_row[p]]) begin failures++; $display("FAIL row port %0d", p); end
      end
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (fr_data[p] !== model[fr_idx[p]]) begin failures++; $display("FAIL full port %0d", p); end
      end
    end
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
