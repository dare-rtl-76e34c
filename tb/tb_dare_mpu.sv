// tb_dare_mpu -- end-to-end test of the DARE matrix unit at its default sizes.
//
// The testbench plays the host CPU (it dispatches encoded instructions with
// their register values) and connects a behavioural cache/memory model. It
// runs small kernels and checks the memory they leave against a reference
// computed here from the testbench's own copy of the input data:
//   A  dense tile:  C + A*B^T stored with mst (mld, mma, mst)
//   B  gather tile: rows of A picked through an address vector (mld of the
//      vector, mgather, mma, mst) -- SpMM-like, exercises the DMU/VMR chain
//   C  gather without a producer in the queue, scatter through a second
//      address vector, then a load behind the stores
//   D  a long burst of loads of data that is already cached -- fills the
//      queue and makes the filter judge tentative uops as hits
//   E  a two-level chain: address vector -> mgather of address vectors ->
//      mgather of data
// Each mechanism of the design is counted and must occur at least once.
module tb_dare_mpu;
  import dare_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            in_valid, in_ready;
  logic [31:0]     in_instr;
  logic [XLEN-1:0] in_rs1, in_rs2;
  logic            mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t        mem_req;
  mem_rsp_t        mem_rsp;
  logic            idle, illegal;
  logic [TS_W-1:0] threshold;
  dare_events_t    ev;

  dare_mpu dut (.*);

  llc_model #(.MEM_BYTES(65536), .READY_PCT(70)) u_llc (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req (mem_req),
    .rsp_valid (mem_rsp_valid), .rsp (mem_rsp)
  );

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- mechanism counters
  int n_stall, n_pf, n_supp, n_pmiss, n_phit, n_th, n_chain, n_cfail, n_vmrw, n_vmrrel,
      n_sqwait, n_riqfull, n_mma, n_mem;
  initial begin
    n_stall = 0; n_pf = 0; n_supp = 0; n_pmiss = 0; n_phit = 0; n_th = 0; n_chain = 0;
    n_cfail = 0; n_vmrw = 0; n_vmrrel = 0; n_sqwait = 0; n_riqfull = 0; n_mma = 0; n_mem = 0;
  end
  always @(posedge clk) if (rst_n) begin
    n_stall   <= n_stall   + int'(ev.hazard_stall);
    n_pf      <= n_pf      + int'(ev.pf_sent);
    n_supp    <= n_supp    + int'(ev.pf_suppressed);
    n_pmiss   <= n_pmiss   + int'(ev.pred_miss);
    n_phit    <= n_phit    + int'(ev.pred_hit);
    n_th      <= n_th      + int'(ev.th_update);
    n_chain   <= n_chain   + int'(ev.chain_wake);
    n_cfail   <= n_cfail   + int'(ev.chain_fail);
    n_vmrw    <= n_vmrw    + int'(ev.vmr_write);
    n_vmrrel  <= n_vmrrel  + int'(ev.vmr_release);
    n_sqwait  <= n_sqwait  + int'(ev.sq_wait);
    n_riqfull <= n_riqfull + int'(ev.riq_full);
    n_mma     <= n_mma     + int'(ev.mma_done);
    n_mem     <= n_mem     + int'(ev.mem_done);
  end

  // ---------------- testbench copy of memory (inputs only)
  logic [7:0] img [65536];
  task automatic put32(input int unsigned a, input logic [31:0] d);
    for (int b = 0; b < 4; b++) img[(a + b) % 65536] = d[8*b +: 8];
    u_llc.poke32(a, d);
  endtask
  task automatic put64(input int unsigned a, input logic [63:0] d);
    put32(a, d[31:0]);
    put32(a + 4, d[63:32]);
  endtask
  function automatic logic [31:0] img32(input int unsigned a);
    logic [31:0] d;
    for (int b = 0; b < 4; b++) d[8*b +: 8] = img[(a + b) % 65536];
    return d;
  endfunction

  // ---------------- host dispatch
  function automatic logic [31:0] enc(input op_e op, input int rd, input int r1, input int r2);
    return {7'b0, 5'(r2), 5'(r1), 3'(op), 5'(rd), 7'b0001011};
  endfunction

  task automatic send(input logic [31:0] ins, input logic [63:0] a, input logic [63:0] b);
    // drive and sample away from the active clock edge
    @(negedge clk);
    in_instr = ins; in_rs1 = a; in_rs2 = b; in_valid = 1'b1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask
  task automatic mcfg(input int csr, input int v);   send(enc(OP_MCFG, 0, 0, 0), 64'(csr), 64'(v)); endtask
  task automatic mld(input int md, input int base, input int stride);  send(enc(OP_MLD, md, 0, 0), 64'(base), 64'(stride)); endtask
  task automatic mst(input int ms, input int base, input int stride);  send(enc(OP_MST, ms, 0, 0), 64'(base), 64'(stride)); endtask
  task automatic mma(input int md, input int s1, input int s2);        send(enc(OP_MMA, md, s1, s2), '0, '0); endtask
  task automatic mgather(input int md, input int s1);                  send(enc(OP_MGATHER, md, s1, 0), '0, '0); endtask
  task automatic mscatter(input int s2, input int s1);                 send(enc(OP_MSCATTER, 0, s1, s2), '0, '0); endtask

  task automatic wait_idle();
    repeat (4) @(posedge clk);
    while (!idle) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  task automatic check32(input int unsigned a, input logic [31:0] exp, input string what);
    logic [31:0] got = u_llc.peek32(a);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s @%h: got %h exp %h", what, a, got, exp);
    end
  endtask

  // ---------------- layout
  localparam int A_B = 'h1000, A_S = 128;  // A tile rows, stride 128
  localparam int B_B = 'h2000;             // B tile, stride 64
  localparam int C_B = 'h3000;             // C tile
  localparam int O1  = 'h4000, O2 = 'h6000;
  localparam int IDX = 'h5000, IDX3 = 'h7000, SCT = 'h8000;
  localparam int IDX2 = 'h9000, PTR = 'hA000, O3 = 'hB000;

  int perm [16], perm2 [16], perm3 [16];

  function automatic logic [31:0] dot_ab(input int arow_addr, input int brow, input int kel);
    logic [31:0] s = '0;
    for (int k = 0; k < kel; k++) s += img32(arow_addr + 4*k) * img32(B_B + 64*brow + 4*k);
    return s;
  endfunction

  initial begin
    in_valid = 1'b0; in_instr = '0; in_rs1 = '0; in_rs2 = '0;
    for (int i = 0; i < 65536; i++) img[i] = 8'h00;
    // data
    for (int r = 0; r < 16; r++)
      for (int k = 0; k < 16; k++) begin
        put32(A_B + A_S*r + 4*k, $urandom);
        put32(B_B + 64*r + 4*k, $urandom);
        put32(C_B + 64*r + 4*k, $urandom);
      end
    for (int r = 0; r < 16; r++) begin perm[r] = r; perm2[r] = r; perm3[r] = r; end
    for (int r = 15; r > 0; r--) begin
      int j, t;
      j = $urandom_range(r, 0);
      t = perm[r]; perm[r] = perm[j]; perm[j] = t;
      j = $urandom_range(r, 0); t = perm2[r]; perm2[r] = perm2[j]; perm2[j] = t;
      j = $urandom_range(r, 0); t = perm3[r]; perm3[r] = perm3[j]; perm3[j] = t;
    end
    for (int r = 0; r < 16; r++) begin
      put64(IDX + 64*r, 64'(A_B + A_S*perm[r]));     // gather rows of A
      put64(IDX3 + 64*r, 64'(SCT + 64*perm2[r]));    // scatter targets
      put64(IDX2 + 64*r, 64'(PTR + 64*perm3[r]));    // pointers to pointers
      put64(PTR + 64*r, 64'(A_B + A_S*perm[r]));     // ... to rows of A
    end

    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // ---- A: dense tile  O1 = C + A*B^T
    mcfg(0, 16); mcfg(1, 64); mcfg(2, 16);
    mld(1, A_B, A_S); mld(2, B_B, 64); mld(0, C_B, 64);
    mma(0, 1, 2);
    mst(0, O1, 64);
    wait_idle();
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++)
        check32(O1 + 64*i + 4*j, img32(C_B + 64*i + 4*j) + dot_ab(A_B + A_S*i, j, 16), "dense");
    $display("phase A done at cycle %0d", cyc);

    // ---- B: gathered tile  O2 = A[perm]*B^T  (m5 is zero after reset)
    u_llc.flush();
    mld(2, B_B, 64);       // cold: keeps the LSU busy so the next two wait in the queue
    mld(3, IDX, 64);
    mgather(4, 3);
    mma(5, 4, 2);
    mst(5, O2, 64);
    wait_idle();
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++)
        check32(O2 + 64*i + 4*j, dot_ab(A_B + A_S*perm[i], j, 16), "gather");
    $display("phase B done at cycle %0d", cyc);

    // ---- C: gather with no producer in the queue, scatter, load behind stores
    u_llc.flush();
    mld(2, B_B, 64);
    mgather(6, 3);         // its producer has left the queue: no runahead chain
    mld(7, IDX3, 64);
    mscatter(6, 7);
    mld(1, SCT, 64);
    mst(1, O3, 64);
    wait_idle();
    for (int r = 0; r < 16; r++)
      for (int k = 0; k < 16; k++)
        check32(SCT + 64*perm2[r] + 4*k, img32(A_B + A_S*perm[r] + 4*k), "scatter");
    // O3 row r = SCT row r = A row perm[q] where perm2[q] == r
    for (int q = 0; q < 16; q++)
      for (int k = 0; k < 16; k++)
        check32(O3 + 64*perm2[q] + 4*k, img32(A_B + A_S*perm[q] + 4*k), "load-after-store");
    $display("phase C done at cycle %0d", cyc);

    // ---- D: burst of loads of cached data, then one tile with a narrow shape
    for (int n = 0; n < 40; n++) mld(1 + (n % 2), (n % 2) ? B_B : A_B, (n % 2) ? 64 : A_S);
    mcfg(0, 8); mcfg(1, 32); mcfg(2, 4);
    mld(0, C_B, 64);
    mma(0, 1, 2);
    mst(0, O1 + 'h800, 64);
    mcfg(0, 16); mcfg(1, 64); mcfg(2, 16);
    wait_idle();
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 16; j++) begin
        logic [31:0] e;
        if (j >= 8) e = 32'h0;                            // beyond K=32 bytes: cleared by mld
        else if (j < 4) e = img32(C_B + 64*i + 4*j) + dot_ab(A_B + A_S*i, j, 8);
        else e = img32(C_B + 64*i + 4*j);                 // beyond N: unchanged
        check32(O1 + 'h800 + 64*i + 4*j, e, "narrow");
      end
    $display("phase D done at cycle %0d", cyc);

    // ---- E: two-level chain  m6 = ptrs (IDX2) ; m7 = gather(ptrs) ; m4 = gather(m7)
    u_llc.flush();
    mld(2, B_B, 64);
    mld(6, IDX2, 64);
    mgather(7, 6);
    mgather(4, 7);
    mst(4, O2 + 'h800, 64);
    wait_idle();
    for (int r = 0; r < 16; r++)
      for (int k = 0; k < 16; k++)
        check32(O2 + 'h800 + 64*r + 4*k, img32(A_B + A_S*perm[perm3[r]] + 4*k), "chain2");
    $display("phase E done at cycle %0d", cyc);

    // ---- every mechanism must have happened
    begin
      string names [15] = '{"hazard stall", "prefetch sent", "prefetch suppressed",
        "predicted miss (granted)", "predicted hit (filtered)", "threshold update",
        "chain wake", "chain fail", "VMR write", "VMR release", "SQ drain wait",
        "RIQ full", "mma done", "memory instr done", "illegal never"};
      int cnts [15];
      cnts = '{n_stall, n_pf, n_supp, n_pmiss, n_phit, n_th, n_chain, n_cfail, n_vmrw,
               n_vmrrel, n_sqwait, n_riqfull, n_mma, n_mem, 1};
      for (int m = 0; m < 15; m++) begin
        $display("  %-26s %0d", names[m], cnts[m]);
        checks++;
        if (cnts[m] == 0) begin failures++; $display("FAIL mechanism never seen: %s", names[m]); end
      end
    end
    checks++;
    if (dut.u_fl.count != 5'(VMR_ENTRIES)) begin
      failures++; $display("FAIL VMR entries leaked: %0d free", dut.u_fl.count);
    end
    $display("threshold=%0d llc hits=%0d misses=%0d writes=%0d cycles=%0d",
             threshold, u_llc.n_hits, u_llc.n_misses, u_llc.n_writes, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (illegal) begin failures++; $display("FAIL illegal instruction"); end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
