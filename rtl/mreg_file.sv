// mreg_file -- the eight architectural matrix registers m0..m7.
//
// Each register is 16 rows of 64 bytes (1 KB, 8 KB in total), held in
// flip-flops. Ports: two asynchronous row read ports (used by the load/store
// unit for gather addresses and store data), three whole-register read ports
// (used by the mma unit), one row write port (load data, one row per cycle)
// and one whole-register write port (mma results). Writes take effect at the
// clock edge. The issue logic never lets both write ports target the same
// register in one cycle; if they do the row write wins. Reset clears all
// registers. Register count and size follow the design description; the
// port set is this implementation's choice.
module mreg_file
  import dare_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // row read ports
  input  logic [MREG_IW-1:0] rr_idx [2],
  input  logic [ROW_IW-1:0]  rr_row [2],
  output row_t               rr_data [2],
  // whole-register read ports
  input  logic [MREG_IW-1:0] fr_idx [3],
  output mreg_t              fr_data [3],
  // row write port
  input  logic               rw_en,
  input  logic [MREG_IW-1:0] rw_idx,
  input  logic [ROW_IW-1:0]  rw_row,
  input  row_t               rw_data,
  // whole-register write port
  input  logic               fw_en,
  input  logic [MREG_IW-1:0] fw_idx,
  input  mreg_t              fw_data
);
  mreg_t regs [NUM_MREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NUM_MREGS; r++) regs[r] <= '0;
    end else begin
      if (fw_en) regs[fw_idx] <= fw_data;
      if (rw_en) regs[rw_idx][rw_row] <= rw_data;
    end
  end

  always_comb begin
    for (int p = 0; p < 2; p++) rr_data[p] = regs[rr_idx[p]][rr_row[p]];
    for (int p = 0; p < 3; p++) fr_data[p] = regs[fr_idx[p]];
  end
endmodule
