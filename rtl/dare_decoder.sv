// dare_decoder -- decodes DARE instructions and holds the shape CSRs.
//
// The host dispatches one 32-bit instruction per handshake together with the
// values of its two general-purpose source registers. The decoder keeps the
// three CSRs matrixM (rows), matrixK (bytes per row) and matrixN (columns of
// an mma result). mcfg writes the CSR named by rs1 with the value in rs2 and
// is consumed here. Every other instruction is turned into a minstr_t that
// carries the current shape and a sequence tag and is handed to the runahead
// issue queue; the handshake is combinational (in_ready = out_ready, or 1 for
// mcfg). Unknown encodings are dropped and flagged on `illegal`.
//
// The instruction set (mcfg, mld, mst, mma, mgather, mscatter and their
// operands) follows the design description. The bit encoding is this
// implementation's own: custom-0 major opcode, funct3 = op_e, matrix
// registers in the low three bits of rd/rs1/rs2:
//   mld md,(rs1),rs2     rd=md
//   mst ms3,(rs1),rs2    rd=ms3
//   mma md,ms1,ms2       rd=md rs1=ms1 rs2=ms2
//   mgather md,(ms1)     rd=md rs1=ms1
//   mscatter ms2,(ms1)   rs1=ms1 rs2=ms2
// CSR reset values (16 rows, 64 bytes, 16 columns) and the clamping of written
// values to those maxima are also own choices.
//
// Lint note: funct7, the upper two bits of each register field and the
// upper 16 bits of rs1 (addresses are 48 bits) are ignored by this encoding
// and are reported as unused.
module dare_decoder
  import dare_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [31:0]     in_instr,
  input  logic [XLEN-1:0] in_rs1,
  input  logic [XLEN-1:0] in_rs2,
  output logic            out_valid,
  input  logic            out_ready,
  output minstr_t         out_instr,
  output shape_t          csr_shape,
  output logic            illegal
);
  logic [2:0]  f3;
  logic        legal, is_cfg;
  logic [4:0]  rd, rs1, rs2;
  logic [SEQ_W-1:0] seq;

  assign f3     = in_instr[14:12];
  assign rd     = in_instr[11:7];
  assign rs1    = in_instr[19:15];
  assign rs2    = in_instr[24:20];
  assign legal  = (in_instr[6:0] == OPC_DARE) && (f3 <= 3'd5);
  assign is_cfg = legal && (op_e'(f3) == OP_MCFG);

  always_comb begin
    out_instr        = '0;
    out_instr.op     = op_e'(f3);
    out_instr.shape  = csr_shape;
    out_instr.seq    = seq;
    unique case (op_e'(f3))
      OP_MLD: begin
        out_instr.md     = rd[MREG_IW-1:0];
        out_instr.base   = in_rs1[ADDR_W-1:0];
        out_instr.stride = in_rs2;
      end
      OP_MST: begin
        out_instr.ms2    = rd[MREG_IW-1:0];
        out_instr.base   = in_rs1[ADDR_W-1:0];
        out_instr.stride = in_rs2;
      end
      OP_MMA: begin
        out_instr.md  = rd[MREG_IW-1:0];
        out_instr.ms1 = rs1[MREG_IW-1:0];
        out_instr.ms2 = rs2[MREG_IW-1:0];
      end
      OP_MGATHER: begin
        out_instr.md  = rd[MREG_IW-1:0];
        out_instr.ms1 = rs1[MREG_IW-1:0];
      end
      OP_MSCATTER: begin
        out_instr.ms1 = rs1[MREG_IW-1:0];
        out_instr.ms2 = rs2[MREG_IW-1:0];
      end
      default: ;
    endcase
  end

  assign out_valid = in_valid && legal && !is_cfg;
  assign in_ready  = (legal && !is_cfg) ? out_ready : 1'b1;
  assign illegal   = in_valid && !legal;

  function automatic logic [6:0] clampv(input logic [XLEN-1:0] v, input int unsigned mx);
    clampv = (v > XLEN'(mx)) ? 7'(mx) : v[6:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      csr_shape <= '{m: 5'(MROWS), k: 7'(ROW_BYTES), n: 5'(SA_DIM)};
      seq       <= '0;
    end else if (in_valid && in_ready) begin
      if (is_cfg) begin
        unique case (in_rs1[1:0])
          CSR_M:   csr_shape.m <= 5'(clampv(in_rs2, MROWS));
          CSR_K:   csr_shape.k <= clampv(in_rs2, ROW_BYTES);
          CSR_N:   csr_shape.n <= 5'(clampv(in_rs2, SA_DIM));
          default: ;
        endcase
      end else if (legal) begin
        seq <= seq + 1'b1;
      end
    end
  end
endmodule
