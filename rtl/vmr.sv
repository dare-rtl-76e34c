// vmr -- Vector Matrix Register: storage for base-address vectors in runahead.
//
// A reduced matrix register file: 16 entries, each a vector of 16 elements
// (one per matrix-register row) of 48 bits, the Sv48 virtual address width.
// An instruction woken by the dependency management unit writes the first
// 48 bits of each row it loads into its entry; the consumer mgather reads its
// per-row base addresses from there to form prefetch addresses.
//
// Beside the memory array this module keeps the bookkeeping of each entry:
// rows expected (the producer's tile height), rows sent and rows filled,
// whether the producer left the queue before sending all of its rows
// (aborted) and whether the consumer is done with the entry. `ready` says
// the vector is complete; `dead` that it never will be. An entry is handed
// back to the free list (one per cycle, lowest index first) once all sent
// rows have returned and the consumer is done. Array size and element width
// follow the design description (Fig. 4(c)); the bookkeeping is this
// implementation's own way of deciding "the consumer finished reading".
//
// Lint note: rst_n is an asynchronous reset and also the `disable iff`
// condition of the handshake assertions, which lint reports as a net used
// both synchronously and asynchronously; it is not a circuit problem.
module vmr
  import dare_pkg::*;
#(
  parameter int unsigned ENTRIES = VMR_ENTRIES,
  parameter int unsigned ROWS    = MROWS,
  parameter int unsigned W       = VMR_W,
  localparam int unsigned IW     = $clog2(ENTRIES),
  localparam int unsigned RW     = $clog2(ROWS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // allocation (from the dependency management unit)
  input  logic [ENTRIES-1:0]   alloc_mask,
  input  logic [RW:0]          alloc_rows [ENTRIES],
  // producer events
  input  logic                 sent_en,
  input  logic [IW-1:0]        sent_idx,
  input  logic                 wr_en,
  input  logic [IW-1:0]        wr_idx,
  input  logic [RW-1:0]        wr_row,
  input  logic [W-1:0]         wr_data,
  input  logic [ENTRIES-1:0]   abort_mask,
  // consumer events
  input  logic [ENTRIES-1:0]   done_mask,
  input  logic [IW-1:0]        rd_idx,
  input  logic [RW-1:0]        rd_row,
  output logic [W-1:0]         rd_data,
  // status
  output logic [ENTRIES-1:0]   ready,
  output logic [ENTRIES-1:0]   dead,
  output logic                 rel_valid,
  output logic [IW-1:0]        rel_idx
);
  logic [W-1:0] mem [ENTRIES][ROWS];

  logic [ENTRIES-1:0] busy, aborted, cdone;
  logic [RW:0]        target [ENTRIES];
  logic [RW:0]        sent   [ENTRIES];
  logic [RW:0]        filled [ENTRIES];
  logic [ENTRIES-1:0] can_rel;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx][wr_row] <= wr_data;
  end
  assign rd_data = mem[rd_idx][rd_row];

  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      ready[e]   = busy[e] && !aborted[e] && (filled[e] == target[e]);
      dead[e]    = busy[e] && aborted[e];
      can_rel[e] = busy[e] && (sent[e] == filled[e]) && cdone[e]
                   && (aborted[e] || filled[e] == target[e]);
    end
    rel_valid = 1'b0;
    rel_idx   = '0;
    for (int e = ENTRIES-1; e >= 0; e--) begin
      if (can_rel[e]) begin
        rel_valid = 1'b1;
        rel_idx   = IW'(e);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= '0;
      aborted <= '0;
      cdone   <= '0;
      for (int e = 0; e < ENTRIES; e++) begin
        target[e] <= '0;
        sent[e]   <= '0;
        filled[e] <= '0;
      end
    end else begin
      for (int e = 0; e < ENTRIES; e++) begin
        if (alloc_mask[e]) begin
          busy[e]    <= 1'b1;
          aborted[e] <= 1'b0;
          cdone[e]   <= 1'b0;
          target[e]  <= alloc_rows[e];
          sent[e]    <= '0;
          filled[e]  <= '0;
        end else if (busy[e]) begin
          if (sent_en && sent_idx == IW'(e)) sent[e] <= sent[e] + 1'b1;
          if (wr_en && wr_idx == IW'(e))     filled[e] <= filled[e] + 1'b1;
          if (abort_mask[e]) aborted[e] <= 1'b1;
          if (done_mask[e])  cdone[e]   <= 1'b1;
          if (rel_valid && rel_idx == IW'(e)) busy[e] <= 1'b0;
        end
      end
    end
  end

`ifndef SYNTHESIS
  a_no_alloc_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (alloc_mask & busy) == '0) else $error("VMR entry allocated twice");
`endif
endmodule
