// tb_scp_llc_full: the SCP slice at the paper's configuration, with no
// parameter changed: 8 domains with 8 tag ways each, 4096 sets (16 MiB of
// 64-byte lines), a shared pool of 262144 data slots, 40-bit physical
// addresses, hit latency 20, T_miss 200, a 524288-counter Bloom filter with
// 3 hashes, and a leakage budget of 16 downgrades per 3,000,000-cycle window.
//
// Directed steps: a miss and a hit; another domain finding the line
// (exactly T_miss, no memory read, owner downgraded); a write upgrade that
// invalidates the other copy while the other domain's tag survives; a
// write-through store and a find of it; a domain filling one set past its 8
// ways with a dirty line first, which evicts it, frees its slot and writes
// it back; Prime+Probe and Flush+Reload probes; two domains trading a line
// on an adaptive page until the page is promoted. Then random traffic from
// all domains over 48 lines in four sets, and misses with the Bloom filter
// switched off. Data is checked against a
// reference image, every latency against the hit/T_miss classes, refcounts
// against the tags in all partitions, and every mechanism must occur.
module tb_scp_llc_full;
  import scp_pkg::*;
  localparam int D = scp_pkg::DEF_D, WD = scp_pkg::DEF_WD, SETS = scp_pkg::DEF_SETS;
  localparam int LA = scp_pkg::DEF_LADDR_BITS, LB = scp_pkg::DEF_LINE_BITS, BE = LB / 8, N = D * WD * SETS;
  localparam int HIT = scp_pkg::DEF_HIT_LAT, TM = scp_pkg::DEF_T_MISS;

  logic clk = 0, rst_n = 0, init_done, bf_enable = 1'b1;
  logic req_valid = 0, req_ready, rsp_valid;
  logic [2:0] req_dom = '0, rsp_dom;
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

  scp_llc dut (.clk, .rst_n, .init_done, .bf_enable, .req_valid, .req_ready, .req_dom, .req_op,
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
    repeat (5000000) @(posedge clk);
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
    req_valid = 1; req_dom = 3'(dom); req_op = op; req_addr = a; req_wdata = wd; req_be = be;
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
      if (dut.g_part[4].u_part.mem[s][w].valid) refs[dut.g_part[4].u_part.mem[s][w].fp]++;
      if (dut.g_part[5].u_part.mem[s][w].valid) refs[dut.g_part[5].u_part.mem[s][w].fp]++;
      if (dut.g_part[6].u_part.mem[s][w].valid) refs[dut.g_part[6].u_part.mem[s][w].fp]++;
      if (dut.g_part[7].u_part.mem[s][w].valid) refs[dut.g_part[7].u_part.mem[s][w].fp]++;
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

    // ---- directed steps ---------------------------------------------------------
    a = 34'h1_2345_6001;
    access(0, OP_READ, a, '0, '0, MODE_SCP);
    check(lat == TM && stats.misses == 1 && u_mem.reads == 1, "step 1: miss at T_miss");
    access(0, OP_READ, a, '0, '0, MODE_SCP);
    check(lat == HIT && stats.hits == 1, "step 2: own hit at the hit latency");
    access(1, OP_READ, a, '0, '0, MODE_SCP);
    check(lat == TM && stats.finds == 1 && u_mem.reads == 1 && stats.downgrades == 1,
          "step 3: find, no memory read, owner downgraded");
    access(1, OP_WRITE, a, {16{32'hC0DE_0001}}, '1, MODE_SCP);
    check(lat == HIT && stats.upgrades == 1, "step 4: upgrade at the hit latency");
    access(0, OP_READ, a, '0, '0, MODE_SCP);
    check(lat == HIT && stats.hits == 3, "step 5: domain 0 tag survives the peer write");
    access(2, OP_WRITE, a + 34'h40, {16{32'hFEED_0002}}, '1, MODE_WT);
    check(lat == TM && stats.wt_stores == 1 && n_post == 0, "step 6: write-through store on a miss");
    access(3, OP_READ, a + 34'h40, '0, '0, MODE_WT);
    check(lat == TM && stats.finds == 2 && stats.downgrades == 2, "step 7: find of a write-through line");
    // dirty line then 8 more lines in its set, all from domain 4
    access(4, OP_WRITE, 34'h0_0000_0A5, {16{32'hD1D1_0003}}, '1, MODE_SCP);
    for (int i = 1; i <= WD; i++) access(4, OP_READ, 34'h0_0000_0A5 + 34'(i * SETS), '0, '0, MODE_SCP);
    check(stats.tag_evicts == 1 && stats.slot_frees == 1 && stats.writebacks == 1 &&
          u_mem.peek(34'h0_0000_0A5) == {16{32'hD1D1_0003}}, "step 8: dirty eviction written back");
    access(4, OP_READ, 34'h0_0000_0A5, '0, '0, MODE_SCP);
    check(lat == TM, "step 9: evicted line misses again");
    // Prime+Probe: domain 5 primes set 0x123 with 8 lines, domain 6 thrashes it
    for (int i = 0; i < WD; i++) access(5, OP_READ, 34'h3_0000_0123 + 34'(i * SETS), '0, '0, MODE_SCP);
    for (int i = 0; i < 3 * WD; i++) access(6, OP_READ, 34'h3_1000_0123 + 34'(i * SETS), '0, '0, MODE_SCP);
    t_hit0 = 0;
    for (int i = 0; i < WD; i++) begin
      access(5, OP_READ, 34'h3_0000_0123 + 34'(i * SETS), '0, '0, MODE_SCP);
      if (lat == HIT) t_hit0++;
    end
    check(t_hit0 == WD, "step 10: Prime+Probe sees no victim activity");
    // Flush+Reload: reload of a line the victim holds vs one it does not
    access(6, OP_READ, 34'h2_0000_0777, '0, '0, MODE_SCP);
    access(7, OP_READ, 34'h2_0000_0777, '0, '0, MODE_SCP);
    t_hit0 = lat;
    access(7, OP_READ, 34'h2_0000_1777, '0, '0, MODE_SCP);
    check(t_hit0 == TM && lat == TM, "step 11: Flush+Reload latencies equal");
    // adaptive page: domains 5 and 6 trade a line until it is promoted
    for (int i = 0; i < 20 && stats.promotions == 0; i++) begin
      access(5, OP_WRITE, 34'h1_0000_0300, {16{32'(i)}}, '1, MODE_ADAPTIVE);
      access(6, OP_READ, 34'h1_0000_0300, '0, '0, MODE_ADAPTIVE);
    end
    check(stats.promotions == 1, "step 12: adaptive page promoted after T_leak downgrades");
    check_refcounts();

    // ---- random traffic ------------------------------------------------------------
    lat_min = 150; lat_max = 230;
    for (int it = 0; it < 600; it++) begin
      dom = $urandom_range(0, D - 1);
      pg  = $urandom_range(0, 2);
      ln  = $urandom_range(0, 15);
      a   = 34'(ln % 4) + 34'((ln / 4) * SETS) + 34'((40 + pg) << 20);
      mode = (pg == 0) ? MODE_SCP : (pg == 1) ? MODE_WT : MODE_ADAPTIVE;
      if ($urandom_range(0, 2) == 0)
        access(dom, OP_WRITE, a, {16{$urandom}}, BE'({2{$urandom}}), mode);
      else
        access(dom, OP_READ, a, '0, '0, mode);
    end
    // Bloom filter switched off: every miss scans the peer partitions
    bf_enable = 1'b0;
    for (int i = 0; i < 8; i++) access(i, OP_READ, 34'h2_2000_0000 + 34'(i * 64), '0, '0, MODE_SCP);
    check(stats.misses > stats.bf_skips, "step 13: misses scanned with the filter off");
    bf_enable = 1'b1;
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
