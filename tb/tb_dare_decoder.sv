// tb_dare_decoder -- encodes every DARE instruction, checks the decoded
// fields, that mcfg writes (and clamps) the shape CSRs without reaching the
// queue, that the shape and a rising sequence tag are attached, that
// backpressure is passed on and that unknown encodings are flagged.
module tb_dare_decoder;
  import dare_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, illegal;
  logic [31:0] in_instr;
  logic [XLEN-1:0] in_rs1, in_rs2;
  minstr_t out_instr;
  shape_t csr_shape;
  dare_decoder dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [31:0] enc(input int f3, input int rd, input int r1, input int r2);
    return {7'b0, 5'(r2), 5'(r1), 3'(f3), 5'(rd), 7'b0001011};
  endfunction

  task automatic drive(input logic [31:0] ins, input logic [63:0] a, input logic [63:0] b);
    @(negedge clk);
    in_instr = ins; in_rs1 = a; in_rs2 = b; in_valid = 1'b1;
    #1;
  endtask

  initial begin
    in_valid = 0; in_instr = '0; in_rs1 = '0; in_rs2 = '0; out_ready = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    #1 chk(csr_shape.m == 16 && csr_shape.k == 64 && csr_shape.n == 16, "reset shape");
    // mcfg
    drive(enc(0, 0, 0, 0), 64'd0, 64'd8);
    chk(!out_valid && in_ready && !illegal, "mcfg consumed");
    drive(enc(0, 0, 0, 0), 64'd1, 64'd200);
    drive(enc(0, 0, 0, 0), 64'd2, 64'd3);
    @(negedge clk); in_valid = 0; #1;
    chk(csr_shape.m == 8 && csr_shape.k == 64 && csr_shape.n == 3, "mcfg writes, K clamped to 64");
    // mld
    drive(enc(1, 5, 11, 12), 64'h1234_5678_9abc, 64'd96);
    chk(out_valid && out_instr.op == OP_MLD && out_instr.md == 5 && out_instr.base == 48'h1234_5678_9abc
        && out_instr.stride == 96 && out_instr.shape.m == 8 && out_instr.shape.n == 3, "mld fields");
    begin
      logic [SEQ_W-1:0] s0;
      s0 = out_instr.seq;
      // mst with backpressure
      drive(enc(2, 6, 1, 2), 64'h100, 64'd64);
      out_ready = 1'b0; #1;
      chk(out_valid && !in_ready, "backpressure");
      chk(out_instr.op == OP_MST && out_instr.ms2 == 6 && out_instr.base == 'h100 && out_instr.seq == s0 + 1, "mst fields and seq");
      @(negedge clk);
      chk(out_instr.seq == s0 + 1, "seq held while stalled");
      out_ready = 1'b1;
    end
    drive(enc(3, 2, 3, 4), 0, 0);
    chk(out_instr.op == OP_MMA && out_instr.md == 2 && out_instr.ms1 == 3 && out_instr.ms2 == 4, "mma fields");
    drive(enc(4, 7, 1, 0), 0, 0);
    chk(out_instr.op == OP_MGATHER && out_instr.md == 7 && out_instr.ms1 == 1, "mgather fields");
    drive(enc(5, 0, 6, 5), 0, 0);
    chk(out_instr.op == OP_MSCATTER && out_instr.ms1 == 6 && out_instr.ms2 == 5, "mscatter fields");
    drive(enc(7, 0, 0, 0), 0, 0);
    chk(illegal && !out_valid && in_ready, "bad funct3 flagged");
    drive({25'h0, 7'b0110011}, 0, 0);
    chk(illegal && !out_valid, "foreign opcode flagged");
    @(negedge clk); in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
