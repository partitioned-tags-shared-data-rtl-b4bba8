// tb_scp_ctrl: directed test of the SCP controller's operations, run inside
// a small slice (4 domains, 2 tag ways per domain, 4 sets, 32 data slots,
// 64-bit lines) with the paper's latencies: hit 20 cycles, T_miss 200.
// Memory answers in 150 cycles; private caches acknowledge coherence
// messages after 30 cycles. Each step checks data, latency, memory and
// coherence traffic, and event counters against values worked out by hand:
// miss, hit, PeerProbe find (same latency as a miss, no memory read),
// E->S downgrade, S->M upgrade, peer tags left untouched by a write,
// write-through stores at constant latency, dirty eviction with writeback,
// shared eviction that keeps the slot, and adaptive promotion.
module tb_scp_ctrl;
  import scp_pkg::*;
  localparam int D = 4, WD = 2, SETS = 4, LA = 16, LB = 64, BE = 8;
  localparam int HIT = 20, TM = 200, ACK_LAT = 30;

  logic clk = 0, rst_n = 0, init_done;
  logic req_valid = 0, req_ready, rsp_valid;
  logic [1:0] req_dom = '0, rsp_dom;
  op_e req_op = OP_READ;
  logic [LA-1:0] req_addr = '0;
  logic [LB-1:0] req_wdata = '0, rsp_rdata;
  logic [BE-1:0] req_be = '0;
  page_mode_e req_mode = MODE_SCP;
  logic mem_rd_valid, mem_rd_ready, mem_rsp_valid, mem_wb_valid, mem_wb_ready;
  logic [LA-1:0] mem_rd_addr, mem_wb_addr, coh_addr;
  logic [LB-1:0] mem_rsp_data, mem_wb_data;
  logic [$clog2(D * WD * SETS):0] free_slots;
  logic coh_valid, coh_ready, coh_ack, promote_valid, bf_sat_event, mask_overrun;
  coh_e coh_type;
  logic [D-1:0] coh_mask;
  logic [LA-7:0] promote_page;
  scp_stats_t stats;
  int lat_min = 150, lat_max = 150;

  scp_llc #(.D(D), .WD(WD), .SETS(SETS), .LADDR_BITS(LA), .LINE_BITS(LB), .HIT_LAT(HIT),
            .T_MISS(TM), .BF_M(1024), .BF_K(3), .T_LEAK(2), .WINDOW(1000000), .LEAK_PAGES(4))
    dut (.clk, .rst_n, .init_done, .bf_enable(1'b1), .req_valid, .req_ready, .req_dom, .req_op,
         .req_addr, .req_wdata, .req_be, .req_mode, .rsp_valid, .rsp_dom, .rsp_rdata,
         .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rsp_valid, .mem_rsp_data,
         .mem_wb_valid, .mem_wb_ready, .mem_wb_addr, .mem_wb_data,
         .coh_valid, .coh_ready, .coh_type, .coh_mask, .coh_addr, .coh_ack,
         .promote_valid, .promote_page, .stats, .bf_sat_event, .mask_overrun, .free_slots);

  scp_tb_mem #(.LADDR_BITS(LA), .LINE_BITS(LB)) u_mem (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // private caches: acknowledge after ACK_LAT cycles, record messages
  int    ack_cnt = -1;
  int    n_inv = 0, n_dg = 0, n_post = 0;
  coh_e  last_type;
  logic [D-1:0] last_mask;
  int    promos = 0;
  logic [LA-7:0] last_promo;
  assign coh_ready = 1'b1;
  always @(posedge clk) begin
    coh_ack <= 1'b0;
    if (rst_n && coh_valid) begin
      last_type = coh_type; last_mask = coh_mask;
      if (coh_type == COH_INV) n_inv++;
      if (coh_type == COH_DOWNGRADE) n_dg++;
      if (coh_type == COH_INV_POST) n_post++;
      if (coh_type != COH_INV_POST) ack_cnt <= ACK_LAT - 1;
    end else if (ack_cnt == 0) begin
      coh_ack <= 1'b1; ack_cnt <= -1;
    end else if (ack_cnt > 0) ack_cnt <= ack_cnt - 1;
    if (rst_n && promote_valid) begin promos++; last_promo = promote_page; end
  end

  logic [LB-1:0] rdata;
  int lat;
  task automatic access(int dom, op_e op, logic [LA-1:0] a, logic [LB-1:0] wd, logic [BE-1:0] be,
                        page_mode_e mode);
    @(negedge clk);
    req_valid = 1; req_dom = 2'(dom); req_op = op; req_addr = a; req_wdata = wd; req_be = be;
    req_mode = mode;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    check(rsp_dom == 2'(dom), "response domain");
    rdata = rsp_rdata;
    @(negedge clk);   // counters update on the response edge
  endtask

  task automatic rd(int dom, logic [LA-1:0] a, page_mode_e mode = MODE_SCP);
    access(dom, OP_READ, a, '0, '0, mode);
  endtask
  task automatic wr(int dom, logic [LA-1:0] a, logic [LB-1:0] wd, logic [BE-1:0] be,
                    page_mode_e mode = MODE_SCP);
    access(dom, OP_WRITE, a, wd, be, mode);
  endtask
  function automatic logic [LB-1:0] merge(logic [LB-1:0] old, logic [LB-1:0] wd, logic [BE-1:0] be);
    for (int b = 0; b < BE; b++) if (be[b]) old[b*8 +: 8] = wd[b*8 +: 8];
    return old;
  endfunction

  initial begin
    int r0, w0, inv0, post0, dg0, te0, sf0;
    logic [LB-1:0] v;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (init_done);

    // 1. true miss: memory read, response exactly at T_miss
    r0 = u_mem.reads;
    rd(0, 16'h0100);
    check(lat == TM, $sformatf("miss latency %0d", lat));
    check(rdata == u_mem.pattern(16'h0100), "miss data");
    check(u_mem.reads == r0 + 1 && stats.misses == 1, "one memory read");
    // 2. own-partition hit
    rd(0, 16'h0100);
    check(lat == HIT && rdata == u_mem.pattern(16'h0100), $sformatf("hit latency %0d", lat));
    check(stats.hits == 1, "hit counted");
    // 3. PeerProbe find: another domain reads the line, no memory access,
    //    E->S downgrade of domain 0, latency still T_miss
    r0 = u_mem.reads; dg0 = n_dg;
    rd(1, 16'h0100);
    check(lat == TM, $sformatf("find latency %0d", lat));
    check(u_mem.reads == r0 && stats.finds == 1, "find without memory read");
    check(rdata == u_mem.pattern(16'h0100), "find data");
    check(n_dg == dg0 + 1 && last_mask == 4'b0001 && stats.downgrades == 1, "downgrade of owner");
    rd(1, 16'h0100);
    check(lat == HIT, "domain 1 now hits in its own partition");
    // 4. write to an S line: S->M upgrade invalidates domain 0 and waits
    inv0 = n_inv;
    wr(1, 16'h0100, 64'hAAAA_BBBB_CCCC_DDDD, 8'h0F);
    v = merge(u_mem.pattern(16'h0100), 64'hAAAA_BBBB_CCCC_DDDD, 8'h0F);
    check(n_inv == inv0 + 1 && last_type == COH_INV && last_mask == 4'b0001, "upgrade invalidates peer");
    check(lat > HIT, $sformatf("upgrade waits for acknowledgement (%0d)", lat));
    check(stats.upgrades == 1, "upgrade counted");
    // 5. write to the M line: silent, hit latency
    wr(1, 16'h0100, 64'h1111_2222_3333_4444, 8'hF0);
    v = merge(v, 64'h1111_2222_3333_4444, 8'hF0);
    check(lat == HIT && n_inv == inv0 + 1, "write in M stays local");
    // 6. domain 0's tag was never invalidated: it hits in its own partition
    //    (no PeerProbe), downgrades domain 1's M copy and sees the new data
    dg0 = n_dg;
    rd(0, 16'h0100);
    check(lat > HIT && lat < TM, $sformatf("peer tag survives the write (%0d)", lat));
    check(n_dg == dg0 + 1 && last_mask == 4'b0010, "M->S downgrade of the writer");
    check(rdata == v, "single copy: reader sees the writer's data");
    check(stats.finds == 1 && u_mem.reads == r0, "no extra find or memory read");

    // 7. write-through page: stores never wait, whether or not a peer holds it
    rd(2, 16'h0201, MODE_WT);
    rd(3, 16'h0201, MODE_WT);
    check(lat == TM && stats.finds == 2, "find on write-through page");
    post0 = n_post; inv0 = n_inv;
    wr(2, 16'h0201, 64'h5555, 8'h03, MODE_WT);
    check(lat == HIT, $sformatf("WT store with peer holder: %0d", lat));
    check(n_post == post0 + 1 && last_mask == 4'b1000 && n_inv == inv0, "posted invalidation only");
    wr(2, 16'h0201, 64'h6666, 8'h03, MODE_WT);
    check(lat == HIT, "WT store without peer holder: same latency");
    wr(2, 16'h0202, 64'h7777, 8'h03, MODE_WT);     // store miss
    check(lat == TM, "WT store miss at T_miss");
    check(stats.wt_stores == 3, "write-through stores counted");
    rd(3, 16'h0201, MODE_WT);
    check(rdata == merge(u_mem.pattern(16'h0201), 64'h6666, 8'h03), "WT data visible to peer");

    // 8. reload of a line no other domain caches vs one it caches: same time
    rd(0, 16'h0303);
    check(lat == TM, "reload, victim absent");
    rd(0, 16'h0201);
    check(lat == TM, "reload, victim present");

    // 9. dirty eviction in domain 0, set 0 (two ways; it holds 0x0100)
    w0 = u_mem.writebacks; te0 = stats.tag_evicts; sf0 = stats.slot_frees;
    wr(0, 16'h1000, 64'hDEAD_BEEF, 8'hFF);        // fills the free way, M
    rd(0, 16'h1004);                              // evicts 0x0100: still held by domain 1
    check(stats.tag_evicts == te0 + 1 && stats.slot_frees == sf0 && u_mem.writebacks == w0,
          "shared victim: refcount 2->1, slot kept, no writeback");
    rd(0, 16'h1008);                              // evicts dirty 0x1000: refcount 1->0
    check(stats.tag_evicts == te0 + 2 && stats.slot_frees == sf0 + 1, "slot freed");
    check(u_mem.writebacks == w0 + 1, "dirty line written back");
    check(u_mem.peek(16'h1000) == merge(u_mem.pattern(16'h1000), 64'hDEAD_BEEF, 8'hFF), "writeback data");
    rd(1, 16'h0100);
    check(lat == HIT && rdata == v, "domain 1 keeps the line domain 0 evicted");
    r0 = u_mem.reads;
    rd(0, 16'h1000);
    check(lat == TM && u_mem.reads == r0 + 1, "evicted line refetched");
    check(rdata == merge(u_mem.pattern(16'h1000), 64'hDEAD_BEEF, 8'hFF), "refetched data");

    // 10. shared eviction keeps the slot for the other domain
    rd(1, 16'h2001);                              // domain 1 miss, set 1
    rd(0, 16'h2001);                              // domain 0 find, refcount 2
    check(lat == TM, "find");
    sf0 = stats.slot_frees; te0 = stats.tag_evicts;
    rd(1, 16'h2005);
    rd(1, 16'h2009);                              // evicts 0x2001 from domain 1
    check(stats.slot_frees == sf0 && stats.tag_evicts == te0 + 1, "no slot freed");
    rd(0, 16'h2001);
    check(lat == HIT, "other domain's tag untouched by the eviction");
    check(rdata == u_mem.pattern(16'h2001), "data kept");

    // 11. adaptive page: the third cross-domain downgrade exceeds T_leak=2
    for (int i = 0; i < 3; i++) begin
      wr(0, 16'h3002, 64'(i), 8'h01, MODE_ADAPTIVE);
      rd(1, 16'h3002, MODE_ADAPTIVE);
    end
    check(promos == 1 && last_promo == 10'(16'h3002 >> 6), "page promoted");
    check(stats.promotions == 1, "promotion counted");
    inv0 = n_inv;
    wr(0, 16'h3002, 64'h99, 8'h01, MODE_ADAPTIVE);
    check(lat == HIT && n_inv == inv0, "promoted page: store without upgrade wait");
    check(dut.u_ctrl.stats.wt_stores == 4, "store went write-through");
    check(stats.bf_skips > 0, "Bloom filter skipped peer scans");

    $display("hits=%0d finds=%0d misses=%0d skips=%0d", stats.hits, stats.finds, stats.misses, stats.bf_skips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
