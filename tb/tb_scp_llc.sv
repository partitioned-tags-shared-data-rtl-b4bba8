// tb_scp_llc: end-to-end test of the SCP slice (4 domains, 2 tag ways per
// domain, 4 sets, 32 data slots, 64-bit lines, paper latencies: hit 20,
// T_miss 200; memory 150..230 cycles; coherence acknowledgements 3..8).
//
// Phase 1, isolation probes: Prime+Probe (a victim thrashing the attacker's
// set leaves the attacker's probes at hit latency) and Flush+Reload (a
// reload costs T_miss whether or not the victim caches the line).
// Phase 2, random traffic from all domains over 24 lines on three pages, one
// per page mode (permissive, write-through, adaptive). A reference memory
// image checks every returned line; every response latency must be the hit
// latency for an own-partition hit, exactly T_miss for a PeerProbe that
// found the line, and T_miss (or the memory time, if later) for a miss. The
// refcount of every live data slot is checked against the tags that point
// at it, and live plus free slots against N.
// Each mechanism must occur at least once: hit, find, miss, Bloom skip,
// peer scan without a match, upgrade, downgrade, write-through store,
// posted invalidation, tag eviction, slot free, writeback, promotion, and a
// memory answer later than T_miss.
module tb_scp_llc;
  import scp_pkg::*;
  localparam int D = 4, WD = 2, SETS = 4, LA = 16, LB = 64, BE = 8, N = D * WD * SETS;
  localparam int HIT = 20, TM = 200;

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
  logic [$clog2(N):0] free_slots;
  logic coh_valid, coh_ready, coh_ack, promote_valid, bf_sat_event, mask_overrun;
  coh_e coh_type;
  logic [D-1:0] coh_mask;
  logic [LA-7:0] promote_page;
  scp_stats_t stats;
  int lat_min = 150, lat_max = 150;

  scp_llc #(.D(D), .WD(WD), .SETS(SETS), .LADDR_BITS(LA), .LINE_BITS(LB), .HIT_LAT(HIT),
            .T_MISS(TM), .BF_M(64), .BF_K(3), .T_LEAK(2), .WINDOW(20000), .LEAK_PAGES(4))
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
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // private caches
  int ack_cnt = -1, n_post = 0, overruns = 0;
  assign coh_ready = 1'b1;
  always @(posedge clk) begin
    coh_ack <= 1'b0;
    if (rst_n && coh_valid) begin
      if (coh_type == COH_INV_POST) n_post++;
      else ack_cnt <= $urandom_range(3, 8) - 1;
    end else if (ack_cnt == 0) begin
      coh_ack <= 1'b1; ack_cnt <= -1;
    end else if (ack_cnt > 0) ack_cnt <= ack_cnt - 1;
  end
  bit overrun_seen;
  always @(posedge clk) if (rst_n && mask_overrun) overrun_seen = 1;

  logic [LB-1:0] ref_img [logic [LA-1:0]];
  function automatic logic [LB-1:0] ref_get(logic [LA-1:0] a);
    return ref_img.exists(a) ? ref_img[a] : u_mem.pattern(a);
  endfunction

  logic [LB-1:0] rdata;
  int lat;
  scp_stats_t s0;
  task automatic access(int dom, op_e op, logic [LA-1:0] a, logic [LB-1:0] wd, logic [BE-1:0] be,
                        page_mode_e mode);
    logic [LB-1:0] exp;
    @(negedge clk);
    req_valid = 1; req_dom = 2'(dom); req_op = op; req_addr = a; req_wdata = wd; req_be = be;
    req_mode = mode;
    while (!req_ready) @(negedge clk);
    s0 = stats;
    overrun_seen = 0;
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    rdata = rsp_rdata;
    if (overrun_seen) overruns++;
    exp = ref_get(a);
    if (op == OP_WRITE) begin
      for (int b = 0; b < BE; b++) if (be[b]) exp[b*8 +: 8] = wd[b*8 +: 8];
      ref_img[a] = exp;
    end
    check(rdata == exp, $sformatf("data dom %0d addr %h", dom, a));
    @(negedge clk);
    if (stats.hits != s0.hits)
      check(lat == HIT, $sformatf("hit latency %0d", lat));
    else if (stats.finds != s0.finds)
      check(lat == TM, $sformatf("find latency %0d", lat));
    else
      check(lat == TM || (lat > TM && overrun_seen), $sformatf("miss latency %0d", lat));
    check((stats.hits - s0.hits) + (stats.finds - s0.finds) + (stats.misses - s0.misses) == 1,
          "one service per request");
  endtask

  // refcount conservation: walk all tag partitions
  int refs [N];
  task automatic check_refcounts();
    int live;
    for (int i = 0; i < N; i++) refs[i] = 0;
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WD; w++) begin
      if (dut.g_part[0].u_part.mem[s][w].valid) refs[dut.g_part[0].u_part.mem[s][w].fp]++;
      if (dut.g_part[1].u_part.mem[s][w].valid) refs[dut.g_part[1].u_part.mem[s][w].fp]++;
      if (dut.g_part[2].u_part.mem[s][w].valid) refs[dut.g_part[2].u_part.mem[s][w].fp]++;
      if (dut.g_part[3].u_part.mem[s][w].valid) refs[dut.g_part[3].u_part.mem[s][w].fp]++;
    end
    live = 0;
    for (int i = 0; i < N; i++) if (refs[i] > 0) begin
      live++;
      check(dut.u_data.meta[i].rc == refs[i], $sformatf("refcount slot %0d: %0d vs %0d tags", i,
            dut.u_data.meta[i].rc, refs[i]));
      check(dut.u_data.meta[i].state != ST_I, "live slot not in I");
    end
    check(live + int'(free_slots) == N, $sformatf("live %0d + free %0d != N", live, free_slots));
  endtask

  initial begin
    int dom, pg, ln, t_hit0;
    logic [LA-1:0] a;
    page_mode_e mode;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (init_done);

    // ---- phase 1: Prime+Probe and Flush+Reload --------------------------------
    // attacker (domain 0) primes set 2 with two lines
    access(0, OP_READ, 16'h4002, '0, '0, MODE_SCP);
    access(0, OP_READ, 16'h4006, '0, '0, MODE_SCP);
    // victim (domain 1) hammers set 2 with many lines
    for (int i = 0; i < 6; i++) access(1, OP_READ, 16'h5002 + 16'(i * 4), '0, '0, MODE_SCP);
    // attacker probes: both primed lines still hit at the hit latency
    access(0, OP_READ, 16'h4002, '0, '0, MODE_SCP);
    check(lat == HIT, "Prime+Probe: probe 1 unaffected by victim");
    access(0, OP_READ, 16'h4006, '0, '0, MODE_SCP);
    check(lat == HIT, "Prime+Probe: probe 2 unaffected by victim");
    // Flush+Reload: reload of a line the victim caches vs one it does not
    access(1, OP_READ, 16'h6003, '0, '0, MODE_SCP);
    access(0, OP_READ, 16'h6003, '0, '0, MODE_SCP);
    t_hit0 = lat;
    access(0, OP_READ, 16'h6007, '0, '0, MODE_SCP);
    check(t_hit0 == TM && lat == TM, $sformatf("Flush+Reload: %0d vs %0d", t_hit0, lat));
    check_refcounts();

    // ---- phase 2: random traffic -------------------------------------------------
    lat_min = 150; lat_max = 230;
    for (int it = 0; it < 3000; it++) begin
      dom = $urandom_range(0, D - 1);
      pg  = $urandom_range(0, 2);
      ln  = $urandom_range(0, 7);
      a   = 16'((16'h10 + pg) << 6) + 16'(ln * 5);
      mode = (pg == 0) ? MODE_SCP : (pg == 1) ? MODE_WT : MODE_ADAPTIVE;
      if ($urandom_range(0, 2) == 0)
        access(dom, OP_WRITE, a, {$urandom, $urandom}, BE'($urandom), mode);
      else
        access(dom, OP_READ, a, '0, '0, mode);
      if (it % 100 == 0) check_refcounts();
    end
    check_refcounts();

    $display("hits=%0d finds=%0d misses=%0d bf_skips=%0d upgrades=%0d downgrades=%0d wt_stores=%0d",
             stats.hits, stats.finds, stats.misses, stats.bf_skips, stats.upgrades,
             stats.downgrades, stats.wt_stores);
    $display("tag_evicts=%0d slot_frees=%0d writebacks=%0d promotions=%0d posted_inv=%0d overruns=%0d",
             stats.tag_evicts, stats.slot_frees, stats.writebacks, stats.promotions, n_post, overruns);
    check(stats.hits > 0, "mechanism: own-partition hit");
    check(stats.finds > 0, "mechanism: PeerProbe find");
    check(stats.misses > 0, "mechanism: true miss");
    check(stats.bf_skips > 0, "mechanism: Bloom filter skip");
    check(stats.misses > stats.bf_skips, "mechanism: peer scan without match");
    check(stats.upgrades > 0, "mechanism: S->M upgrade");
    check(stats.downgrades > 0, "mechanism: E/M->S downgrade");
    check(stats.wt_stores > 0, "mechanism: write-through store");
    check(n_post > 0, "mechanism: posted invalidation");
    check(stats.tag_evicts > 0, "mechanism: tag eviction");
    check(stats.slot_frees > 0, "mechanism: slot freed");
    check(stats.writebacks > 0 && stats.writebacks == u_mem.writebacks, "mechanism: writeback");
    check(stats.promotions > 0, "mechanism: adaptive promotion");
    check(overruns > 0, "mechanism: memory answer later than T_miss");
    check(stats.misses == u_mem.reads, "memory reads only on true misses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
