// tb_dmu -- builds queue contents by hand and checks the dependency walk:
// the youngest older writer of the source register is chosen, a chain ends
// at an mld, an mgather in between becomes both producer and consumer,
// VMR entries come from the free list in order, a chain whose producer is an
// mma (or has none) fails, and allocation waits for enough free entries.
module tb_dmu;
  import dare_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  localparam int D = 32;

  logic [D-1:0] valid, chained, vsrc_v, vdst_v, set_chained, set_dst, set_src, wake;
  op_e op [D];
  logic [2:0] md [D], ms1 [D];
  logic [4:0] rows [D];
  logic [SEQ_W-1:0] seq [D];
  logic [4:0] head, deq_idx;
  logic deq_en, ev_chain, ev_fail;
  logic [4:0] free_count;
  logic [3:0] free_idx [4];
  logic [2:0] alloc_n;
  logic [15:0] vmr_alloc;
  logic [4:0] vmr_rows [16];
  logic [3:0] dst_vidx [D], src_vidx [D];
  dmu dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic put(input int i, input op_e o, input int d, input int s1);
    valid[i] = 1; op[i] = o; md[i] = 3'(d); ms1[i] = 3'(s1); rows[i] = 5'(8 + i % 8); seq[i] = SEQ_W'(i * 3);
  endtask
  // apply the DMU's updates as the queue would
  always @(posedge clk) begin
    for (int i = 0; i < D; i++) begin
      if (set_chained[i]) chained[i] <= 1;
      if (set_dst[i]) vdst_v[i] <= 1;
      if (set_src[i]) vsrc_v[i] <= 1;
    end
  end
  // wait for the next commit or failure, at most n cycles
  task automatic wait_ev(input int n, output int got);   // 1 chain, 2 fail, 0 none
    got = 0;
    for (int c = 0; c < n && got == 0; c++) begin
      #1;
      if (ev_chain) got = 1; else if (ev_fail) got = 2;
      if (got == 0) @(negedge clk);
    end
  endtask

  initial begin
    int g;
    valid = 0; chained = 0; vsrc_v = 0; vdst_v = 0; head = 30; deq_en = 0; deq_idx = 0;
    for (int i = 0; i < D; i++) begin op[i] = OP_MMA; md[i] = 0; ms1[i] = 0; rows[i] = 16; seq[i] = 0; end
    free_count = 16;
    for (int k = 0; k < 4; k++) free_idx[k] = 4'(7 + k);
    // queue from head 30 (wrapping):
    //  30 mld m1 ; 31 mld m3 ; 0 mgather m3,(m1) ; 1 mld m1 ; 2 mma m2 ; 3 mgather m4,(m3)
    //  -> entry 3's producer of m3 is 0 (mgather), whose producer of m1 is 30 (mld; 1 is younger than 0)
    put(30, OP_MLD, 1, 0); put(31, OP_MLD, 3, 0); put(0, OP_MGATHER, 3, 1);
    put(1, OP_MLD, 1, 0);  put(2, OP_MMA, 2, 0);   put(3, OP_MGATHER, 4, 3);
    // 4 mgather m5,(m2): producer is an mma -> fail
    put(4, OP_MGATHER, 5, 2);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // the oldest mgather (entry 0, source m1 from mld 30) goes first
    wait_ev(10, g);
    chk(g == 1, "first chain committed");
    chk(set_dst == (32'h1 << 30) && set_src == 32'h1 && alloc_n == 1, "mld 30 -> mgather 0");
    chk(dst_vidx[30] == 7 && src_vidx[0] == 7 && vmr_alloc == 16'h0080 && vmr_rows[7] == rows[30], "VMR entry 7 linked");
    chk(wake == set_dst, "producer woken");
    @(negedge clk); free_count = 15; for (int k = 0; k < 4; k++) free_idx[k] = 4'(8 + k);
    // next: mgather 3 -> producer 0 (mgather with its own source) ends the chain
    wait_ev(10, g);
    chk(g == 1 && set_dst == 32'h1 && set_src == 32'h8 && dst_vidx[0] == 8 && src_vidx[3] == 8,
        "mgather 0 feeds mgather 3");
    @(negedge clk); free_count = 14;
    wait_ev(10, g);
    chk(g == 2 && set_chained == 32'h10, "mma producer fails");
    @(negedge clk);
    // chain 12 <- 11 <- 10 built in two steps; allocation waits for a free entry
    valid = 0; chained = 0; vsrc_v = 0; vdst_v = 0; head = 10;
    put(10, OP_MLD, 6, 0); put(11, OP_MGATHER, 7, 6); put(12, OP_MGATHER, 4, 7);
    free_count = 0; for (int k = 0; k < 4; k++) free_idx[k] = 4'(2 + k);
    wait_ev(12, g);
    chk(g == 0, "waits while the free list is empty");
    free_count = 1;
    wait_ev(4, g);
    chk(g == 1 && set_dst == (32'h1 << 10) && set_src == (32'h1 << 11) && dst_vidx[10] == 2, "11 <- 10");
    @(negedge clk); free_count = 1; for (int k = 0; k < 4; k++) free_idx[k] = 4'(3 + k);
    wait_ev(10, g);
    chk(g == 1 && set_dst == (32'h1 << 11) && set_src == (32'h1 << 12) && dst_vidx[11] == 3
        && src_vidx[12] == 3, "12 <- 11");
    // a walk through an unhandled mgather: 22 <- 21 <- 20 in one commit, two entries
    valid = 0; chained = 0; vsrc_v = 0; vdst_v = 0; head = 20;
    put(20, OP_MLD, 1, 0); put(21, OP_MGATHER, 2, 1); put(22, OP_MGATHER, 3, 2);
    chained[21] = 1;   // 21 handled but with no source: the walk from 22 must fail there
    free_count = 4; for (int k = 0; k < 4; k++) free_idx[k] = 4'(12 + k);
    wait_ev(10, g);
    chk(g == 2 && set_chained == (32'h1 << 22), "handled mgather without source ends in failure");
    @(negedge clk);
    // the producer leaves the queue while the walk is under way: no commit for 21
    valid = 0; chained = 0; vsrc_v = 0; vdst_v = 0; head = 20;
    put(20, OP_MLD, 1, 0); put(21, OP_MGATHER, 2, 1);
    deq_en = 1; deq_idx = 20;
    @(negedge clk); deq_en = 0; valid[20] = 0; head = 21;
    wait_ev(10, g);
    chk(g == 2 && !vdst_v[20], "producer gone: no chain for 21");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
