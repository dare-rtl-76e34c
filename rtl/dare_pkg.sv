// dare_pkg -- sizes, types and encodings shared by the DARE matrix unit.
//
// The architectural sizes follow the design description: eight matrix
// registers of 16 rows x 64 bytes, a 32-entry runahead issue queue, a
// 16-entry vector matrix register of 16 x 48-bit elements, 48-entry load and
// store queues, a 16x16 systolic array of 32-bit processing elements and the
// filter classifier constants (32-latency window, 8-cycle bins, 20 % peak
// level, 4-bin margin, 32-cycle slack). Widths that the description leaves
// open (instruction encoding, memory-port tags, number of histogram bins,
// initial threshold, chain depth) are choices of this implementation and are
// marked as such below.
package dare_pkg;

  // ---------------- architectural sizes (from the design description)
  localparam int unsigned NUM_MREGS   = 8;    // m0..m7
  localparam int unsigned MROWS       = 16;   // rows per matrix register
  localparam int unsigned ROW_BYTES   = 64;   // bytes per row
  localparam int unsigned ROW_W       = ROW_BYTES * 8;
  localparam int unsigned ELEM_W      = 32;   // PE datapath width
  localparam int unsigned ROW_ELEMS   = ROW_W / ELEM_W;  // 16
  localparam int unsigned SA_DIM      = 16;   // 16x16 systolic array
  localparam int unsigned RIQ_DEPTH   = 32;
  localparam int unsigned VMR_ENTRIES = 16;
  localparam int unsigned VMR_W       = 48;   // Sv48 virtual address
  localparam int unsigned LQ_DEPTH    = 48;
  localparam int unsigned SQ_DEPTH    = 48;
  localparam int unsigned TS_W        = 16;   // timestamp width
  localparam int unsigned LAT_WINDOW  = 32;   // latencies kept by the classifier
  localparam int unsigned BIN_SHIFT   = 3;    // bins of 8 cycles
  localparam int unsigned PEAK_PCT    = 20;   // a bin above 20 % is a peak
  localparam int unsigned MARGIN_BINS = 4;    // peaks must be further apart
  localparam int unsigned SLACK       = 32;   // added to the valley latency

  // ---------------- implementation choices
  localparam int unsigned XLEN        = 64;   // host general-purpose register width
  localparam int unsigned ADDR_W      = 48;   // byte address on the memory port
  localparam int unsigned NUM_BINS    = 32;   // histogram covers 0..255 cycles
  localparam int unsigned INIT_THRESH = 64;   // threshold before the first update
  localparam int unsigned MAX_CHAIN   = 4;    // producers the DMU follows per mgather
  localparam int unsigned SEQ_W       = 8;    // instruction sequence tag

  localparam int unsigned MREG_IW  = $clog2(NUM_MREGS);
  localparam int unsigned ROW_IW   = $clog2(MROWS);
  localparam int unsigned RIQ_IW   = $clog2(RIQ_DEPTH);
  localparam int unsigned VMR_IW   = $clog2(VMR_ENTRIES);
  localparam int unsigned LQ_IW    = $clog2(LQ_DEPTH);

  typedef logic [ROW_W-1:0]  row_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef row_t [MROWS-1:0]  mreg_t;   // one whole matrix register

  // ---------------- instructions
  // Encoding (own choice): RISC-V custom-0 major opcode 7'b0001011,
  // funct3 selects the operation, the rd/rs1/rs2 fields name matrix
  // registers (low three bits) or general-purpose registers.
  localparam logic [6:0] OPC_DARE = 7'b0001011;

  typedef enum logic [2:0] {
    OP_MCFG     = 3'd0,
    OP_MLD      = 3'd1,
    OP_MST      = 3'd2,
    OP_MMA      = 3'd3,
    OP_MGATHER  = 3'd4,
    OP_MSCATTER = 3'd5
  } op_e;

  // CSR index held in rs1 of mcfg (own choice)
  localparam logic [1:0] CSR_M = 2'd0, CSR_K = 2'd1, CSR_N = 2'd2;

  // Tile shape: rows, bytes per row, columns of the result
  typedef struct packed {
    logic [4:0] m;   // 1..16 rows
    logic [6:0] k;   // 4..64 bytes per row
    logic [4:0] n;   // 1..16 result columns
  } shape_t;

  // A decoded instruction as stored in the RIQ.
  // md: destination (mld, mgather, mma) ; ms1/ms2: sources
  // mst ms3 is carried in ms2, mscatter ms2 in ms2, address vector in ms1.
  typedef struct packed {
    op_e                  op;
    logic [MREG_IW-1:0]   md;
    logic [MREG_IW-1:0]   ms1;
    logic [MREG_IW-1:0]   ms2;
    addr_t                base;    // rs1 value for mld/mst
    logic [XLEN-1:0]      stride;  // rs2 value for mld/mst
    shape_t               shape;
    logic [SEQ_W-1:0]     seq;
  } minstr_t;

  // Register-use summary of an instruction, for the hazard check
  function automatic logic [NUM_MREGS-1:0] dst_mask(input minstr_t i);
    dst_mask = '0;
    if (i.op inside {OP_MLD, OP_MGATHER, OP_MMA}) dst_mask[i.md] = 1'b1;
  endfunction

  function automatic logic [NUM_MREGS-1:0] src_mask(input minstr_t i);
    src_mask = '0;
    unique case (i.op)
      OP_MST:      src_mask[i.ms2] = 1'b1;
      OP_MGATHER:  src_mask[i.ms1] = 1'b1;
      OP_MSCATTER: begin src_mask[i.ms1] = 1'b1; src_mask[i.ms2] = 1'b1; end
      OP_MMA:      begin src_mask[i.ms1] = 1'b1; src_mask[i.ms2] = 1'b1; src_mask[i.md] = 1'b1; end
      default: ;
    endcase
  endfunction

  function automatic logic is_mem(input op_e op);
    is_mem = op inside {OP_MLD, OP_MST, OP_MGATHER, OP_MSCATTER};
  endfunction

  // ---------------- memory port (LSU <-> LLC)
  // One row-sized request per cycle; loads are answered out of order by tag,
  // stores are posted and get no answer.
  typedef struct packed {
    logic               we;
    addr_t              addr;
    row_t               wdata;
    logic [ROW_BYTES-1:0] wmask;
    logic [LQ_IW-1:0]   tag;
  } mem_req_t;

  typedef struct packed {
    logic [LQ_IW-1:0]   tag;
    row_t               rdata;
  } mem_rsp_t;

  // ---------------- prefetch uop (RFU -> LSU)
  typedef struct packed {
    addr_t               addr;
    logic [RIQ_IW-1:0]   riq_idx;   // owning RIQ entry
    logic [SEQ_W-1:0]    seq;       // its sequence tag
    logic                tentative; // first uop of the instruction
    logic                vmr_we;    // write the first 48 bits to the VMR
    logic [VMR_IW-1:0]   vmr_idx;
    logic [ROW_IW-1:0]   row;
  } pf_uop_t;

  // ---------------- load answer reported by the LSU to the RFU
  typedef struct packed {
    logic [LQ_IW-1:0]    lq_idx;
    logic                prefetch;
    pf_uop_t             uop;
    row_t                rdata;
  } ld_done_t;

  // ---------------- one-cycle event pulses of the whole unit
  typedef struct packed {
    logic hazard_stall;   // RIQ head held by a RAW/WAW/WAR conflict
    logic pf_sent;        // prefetch uop sent to the LLC
    logic pf_suppressed;  // a candidate held back by !granted && TentativeSent
    logic pred_miss;      // tentative uop classified LLC miss: granted
    logic pred_hit;       // tentative uop classified hit: instruction filtered
    logic th_update;      // classifier threshold recomputed
    logic chain_wake;     // DMU woke a dependency chain
    logic chain_fail;     // DMU found no usable chain
    logic vmr_write;      // runahead data written into the VMR
    logic vmr_release;    // VMR entry returned to the free list
    logic sq_wait;        // demand load waits for the store queue to drain
    logic lq_full;        // no free load-queue entry
    logic riq_full;       // decoder held because the RIQ is full
    logic mma_done;       // an mma finished
    logic mem_done;       // a memory instruction finished
  } dare_events_t;

endpackage
