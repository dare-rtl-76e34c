// llc_model -- behavioural last-level cache plus main memory for testbenches.
//
// Not synthesizable logic: a stand-in for the cache the matrix unit talks to.
// A byte array of MEM_BYTES holds the data (addresses wrap modulo its size).
// A presence bit per 64-byte line decides the latency of a load: HIT_LAT
// cycles if the line of its start address is present, MISS_LAT otherwise;
// either way the line becomes present. Stores write their masked bytes at
// once, mark the line present and get no answer. A request is accepted in
// a cycle with probability READY_PCT %; answers leave in order of their due time, one per cycle, so hits
// overtake misses. The default latencies follow the evaluated system (20-cycle
// LLC hit, 45 ns memory at 2 GHz, about 90 more cycles).
module llc_model
  import dare_pkg::*;
#(
  parameter int unsigned MEM_BYTES = 65536,
  parameter int unsigned HIT_LAT   = 20,
  parameter int unsigned MISS_LAT  = 110,
  parameter int unsigned PEND      = 64,
  parameter int unsigned READY_PCT = 100   // chance of accepting a request in a cycle
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp
);
  localparam int unsigned NLINES = MEM_BYTES / 64;
  logic [7:0]  mem [MEM_BYTES];
  logic        present [NLINES];
  logic        p_v   [PEND];
  int unsigned p_due [PEND];
  mem_rsp_t    p_rsp [PEND];
  int unsigned now;
  int unsigned n_hits, n_misses, n_writes;

  logic rdy_q;
  always_ff @(posedge clk) rdy_q <= ($urandom_range(99, 0) < READY_PCT);
  assign req_ready = rdy_q;

  function automatic int unsigned wrap(input logic [ADDR_W-1:0] a);
    return int'(a % ADDR_W'(MEM_BYTES));
  endfunction

  task automatic poke32(input int unsigned a, input logic [31:0] d);
    for (int b = 0; b < 4; b++) mem[(a + b) % MEM_BYTES] = d[8*b +: 8];
  endtask
  task automatic poke64(input int unsigned a, input logic [63:0] d);
    for (int b = 0; b < 8; b++) mem[(a + b) % MEM_BYTES] = d[8*b +: 8];
  endtask
  function automatic logic [31:0] peek32(input int unsigned a);
    logic [31:0] d;
    for (int b = 0; b < 4; b++) d[8*b +: 8] = mem[(a + b) % MEM_BYTES];
    return d;
  endfunction
  task automatic flush();
    for (int l = 0; l < NLINES; l++) present[l] = 1'b0;
  endtask
  task automatic warm(input int unsigned a);
    present[(a % MEM_BYTES) / 64] = 1'b1;
  endtask

  initial begin
    rdy_q = 1'b1;
    for (int i = 0; i < MEM_BYTES; i++) mem[i] = 8'h00;
    for (int l = 0; l < NLINES; l++) present[l] = 1'b0;
    for (int p = 0; p < PEND; p++) begin p_v[p] = 1'b0; p_due[p] = 0; p_rsp[p] = '0; end
    now = 0; n_hits = 0; n_misses = 0; n_writes = 0;
  end

  // pick the answer that is due first
  int sel;
  always_comb begin
    sel = -1;
    for (int p = 0; p < PEND; p++)
      if (p_v[p] && p_due[p] <= now && (sel < 0 || p_due[p] < p_due[sel])) sel = p;
    rsp_valid = (sel >= 0);
    rsp       = (sel >= 0) ? p_rsp[sel] : '0;
  end

  always_ff @(posedge clk) begin
    now <= now + 1;
    if (sel >= 0) p_v[sel] <= 1'b0;
    if (rst_n && req_valid && req_ready) begin
      automatic int unsigned a = wrap(req.addr);
      automatic int unsigned line = a / 64;
      if (req.we) begin
        for (int b = 0; b < ROW_BYTES; b++)
          if (req.wmask[b]) mem[(a + b) % MEM_BYTES] <= req.wdata[8*b +: 8];
        present[line] <= 1'b1;
        n_writes <= n_writes + 1;
      end else begin
        automatic int slot = -1;
        automatic mem_rsp_t r;
        for (int p = 0; p < PEND; p++) if (!p_v[p] && slot < 0 && p != sel) slot = p;
        r.tag = req.tag;
        for (int b = 0; b < ROW_BYTES; b++) r.rdata[8*b +: 8] = mem[(a + b) % MEM_BYTES];
        if (slot < 0) $error("llc_model: too many pending loads");
        else begin
          p_v[slot]   <= 1'b1;
          p_rsp[slot] <= r;
          p_due[slot] <= now + (present[line] ? HIT_LAT : MISS_LAT);
        end
        if (present[line]) n_hits <= n_hits + 1;
        else               n_misses <= n_misses + 1;
        present[line] <= 1'b1;
      end
    end
  end
endmodule
