// systolic_array -- DIM x DIM mesh of 32-bit PEs (16x16 by default).
//
// Output-stationary: PE(i,j) accumulates C[i][j]. Row operands enter at the
// left edge (a_left[i], one per row) and move right one PE per cycle; column
// operands enter at the top (b_top[j]) and move down one PE per cycle. The
// caller skews the inputs: A[i][k] enters row i at cycle k+i and B[j][k]
// enters column j at cycle k+j, so both meet in PE(i,j) at cycle k+i+j.
// `load` presets every accumulator from c_in in one cycle; `acc` shows all
// accumulators. The 16x16 size and 32-bit datapath follow the design
// description; the dataflow is this implementation's choice.
//
// Lint note: the B values leaving the bottom row of PEs go nowhere; that
// row of the `b_v` mesh is reported as unused.
module systolic_array #(
  parameter int unsigned DIM = 16,
  parameter int unsigned W   = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          load,
  input  logic [DIM-1:0][DIM-1:0][W-1:0] c_in,
  input  logic                          en,
  input  logic [DIM-1:0][W-1:0]         a_left,
  input  logic [DIM-1:0][W-1:0]         b_top,
  output logic [DIM-1:0][DIM-1:0][W-1:0] acc
);
  // a_h[i][j] is the row operand entering PE(i,j); b_v[i][j] the column one
  logic [DIM-1:0][DIM:0][W-1:0] a_h;
  logic [DIM:0][DIM-1:0][W-1:0] b_v;

  for (genvar i = 0; i < DIM; i++) begin : g_row
    assign a_h[i][0] = a_left[i];
  end
  for (genvar j = 0; j < DIM; j++) begin : g_col
    assign b_v[0][j] = b_top[j];
  end

  for (genvar i = 0; i < DIM; i++) begin : g_i
    for (genvar j = 0; j < DIM; j++) begin : g_j
      pe #(.W(W)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .load  (load),
        .c_in  (c_in[i][j]),
        .en    (en),
        .a_in  (a_h[i][j]),
        .b_in  (b_v[i][j]),
        .a_out (a_h[i][j+1]),
        .b_out (b_v[i+1][j]),
        .acc   (acc[i][j])
      );
    end
  end
endmodule
