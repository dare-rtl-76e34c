// mma_unit -- the execution unit: md += ms1 * ms2^T on the systolic array.
//
// mma md, ms1, ms2 multiplies an M x K tile (ms1, rows of K bytes, i.e. K/4
// 32-bit elements) by the transpose of an N x K tile (ms2) and adds the M x N
// product to md. Element e of a register row sits in bits [32e +: 32].
// The unit reads the three registers through whole-register read ports of
// the matrix register file (their indices are driven on rd_idx_*), which is
// safe because the issue logic keeps writers of ms1, ms2 and md away while
// the instruction is in flight.
//
// Timing after `start` is accepted (start && ready): one cycle preloads the
// accumulators with md, then K/4+M+N-2 cycles stream skewed operands through
// the array, then one cycle writes md back (wb_valid) and pulses `done`.
// Total K/4+M+N cycles. Operands outside the M x N x K/4 shape are fed as
// zero, so rows and columns beyond the shape are written back unchanged.
// The systolic array and register shapes follow the design description; the
// schedule, integer arithmetic and port structure are this design's choice.
module mma_unit
  import dare_pkg::*;
#(
  parameter int unsigned DIM = SA_DIM
) (
  input  logic               clk,
  input  logic               rst_n,
  // issue
  input  logic               start,
  input  minstr_t            instr,
  output logic               ready,
  output logic               busy,
  output minstr_t            cur,          // instruction in flight
  // register file ports
  output logic [MREG_IW-1:0] rd_idx_a,
  output logic [MREG_IW-1:0] rd_idx_b,
  output logic [MREG_IW-1:0] rd_idx_c,
  input  mreg_t              rd_a,
  input  mreg_t              rd_b,
  input  mreg_t              rd_c,
  output logic               wb_valid,
  output logic [MREG_IW-1:0] wb_idx,
  output mreg_t              wb_data,
  output logic               done
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN, S_WB} state_e;
  state_e state;
  logic [6:0] t, t_last;
  logic [4:0] kel;

  logic                               sa_load, sa_en;
  logic [DIM-1:0][DIM-1:0][ELEM_W-1:0] sa_c, sa_acc;
  logic [DIM-1:0][ELEM_W-1:0]         a_left, b_top;

  assign ready    = (state == S_IDLE);
  assign busy     = (state != S_IDLE);
  assign rd_idx_a = cur.ms1;
  assign rd_idx_b = cur.ms2;
  assign rd_idx_c = cur.md;
  assign kel      = cur.shape.k[6:2];
  assign t_last   = 7'(kel) + 7'(cur.shape.m) + 7'(cur.shape.n) - 7'd3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t     <= '0;
      cur   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          cur   <= instr;
          state <= S_LOAD;
        end
        S_LOAD: begin
          t     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          t <= t + 7'd1;
          if (t == t_last) state <= S_WB;
        end
        S_WB: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // preload values and skewed operand streams
  always_comb begin
    for (int i = 0; i < DIM; i++) begin
      for (int j = 0; j < DIM; j++) sa_c[i][j] = rd_c[i][j*ELEM_W +: ELEM_W];
    end
    for (int i = 0; i < DIM; i++) begin
      automatic int k = int'(t) - i;
      a_left[i] = '0;
      b_top[i]  = '0;
      if (k >= 0 && k < int'(kel)) begin
        if (i < int'(cur.shape.m)) a_left[i] = rd_a[i][k*ELEM_W +: ELEM_W];
        if (i < int'(cur.shape.n)) b_top[i]  = rd_b[i][k*ELEM_W +: ELEM_W];
      end
    end
  end

  assign sa_load = (state == S_LOAD);
  assign sa_en   = (state == S_RUN);

  systolic_array #(.DIM(DIM), .W(ELEM_W)) u_sa (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (sa_load),
    .c_in   (sa_c),
    .en     (sa_en),
    .a_left (a_left),
    .b_top  (b_top),
    .acc    (sa_acc)
  );

  always_comb begin
    wb_data = '0;
    for (int i = 0; i < DIM; i++) begin
      for (int j = 0; j < DIM; j++) wb_data[i][j*ELEM_W +: ELEM_W] = sa_acc[i][j];
    end
  end
  assign wb_valid = (state == S_WB);
  assign wb_idx   = cur.md;
  assign done     = (state == S_WB);
endmodule
