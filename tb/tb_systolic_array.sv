// tb_systolic_array -- checks the 16x16 array computes C + A*B^T with skewed
// inputs and that the result is complete exactly K+M+N-2 enable cycles after
// the preload (for the full 16x16x16 case: 46 cycles), using random data
// and a reference product computed here.
module tb_systolic_array;
  localparam int DIM = 16, W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic load, en;
  logic [DIM-1:0][DIM-1:0][W-1:0] c_in, acc;
  logic [DIM-1:0][W-1:0] a_left, b_top;
  systolic_array #(.DIM(DIM), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] A [DIM][DIM], B [DIM][DIM], C [DIM][DIM], R [DIM][DIM];

  task automatic run(input int K);
    for (int i = 0; i < DIM; i++) for (int j = 0; j < DIM; j++) begin
      A[i][j] = $urandom; B[i][j] = $urandom; C[i][j] = $urandom;
    end
    for (int i = 0; i < DIM; i++) for (int j = 0; j < DIM; j++) begin
      R[i][j] = C[i][j];
      for (int k = 0; k < K; k++) R[i][j] += A[i][k] * B[j][k];
    end
    @(negedge clk);
    for (int i = 0; i < DIM; i++) for (int j = 0; j < DIM; j++) c_in[i][j] = C[i][j];
    load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    for (int t = 0; t < K + 2*DIM - 2; t++) begin
      en = 1'b1;
      for (int i = 0; i < DIM; i++) begin
        a_left[i] = (t - i >= 0 && t - i < K) ? A[i][t-i] : '0;
        b_top[i]  = (t - i >= 0 && t - i < K) ? B[i][t-i] : '0;
      end
      @(negedge clk);
      // one enable short of the end the corner PE still lacks its last product
      if (t == K + 2*DIM - 4 && A[DIM-1][K-1] * B[DIM-1][K-1] != 0) begin
        checks++;
        if (acc[DIM-1][DIM-1] === R[DIM-1][DIM-1]) begin
          failures++;
          $display("FAIL corner PE complete one cycle early");
        end
      end
    end
    en = 1'b0;
    for (int i = 0; i < DIM; i++) for (int j = 0; j < DIM; j++) begin
      checks++;
      if (acc[i][j] !== R[i][j]) begin
        failures++;
        if (failures < 5) $display("FAIL K=%0d acc[%0d][%0d]=%h exp %h", K, i, j, acc[i][j], R[i][j]);
      end
    end
    // extra idle cycles keep the result
    @(negedge clk);
    checks++;
    if (acc[0][0] !== R[0][0]) failures++;
  endtask

  initial begin
    load = 0; en = 0; c_in = '0; a_left = '0; b_top = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(16);
    run(5);
    run(1);
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
