// tb_scp_sharing: the two-domain data-sharing microbenchmarks run against
// the SCP slice (4 domains, 4 tag ways each, 16 sets, 64-bit lines, hit 20,
// T_miss 200, leakage budget 4 downgrades per window). Each workload puts
// its two threads in different domains; the private caches are modelled only
// as acknowledgement delays, so every access reaches the slice.
//  * Disjoint: domain 1 keeps a small working set resident while domain 0
//    streams over four times its own partition; domain 1 must still hit on
//    all its lines, with no find and no coherence message between them.
//  * ReadShared: both domains read a shared table; one data entry per line,
//    one downgrade per line at most, no upgrade, both domains hit afterwards.
//  * ProdCons: domain 0 writes a ring of lines, domain 1 reads each after it
//    is written; every consumer read is a downgrade, every producer write
//    after the first lap an S->M upgrade, and the data always arrives.
//  * LockContend: both domains write one lock line in turn; every write
//    after the first is an upgrade and the line never has two entries.
//  * AsyncShare: both domains occasionally write and read a shared region
//    between long private phases; coherent data throughout.
//  * wt_threshold: both domains alternately write lines of one adaptive
//    page; after T_leak+1 downgrades the page is promoted, and from then on
//    its stores are write-through and cause no further downgrades.
// Data is checked against a reference image, latencies against the hit and
// T_miss classes, and refcounts against the tags after every workload.
module tb_scp_sharing;
  import scp_pkg::*;
  localparam int D = 4, WD = 4, SETS = 16, LA = 20, LB = 64, BE = 8, N = D * WD * SETS;
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
            .T_MISS(TM), .BF_M(1024), .BF_K(3), .T_LEAK(4), .WINDOW(1000000), .LEAK_PAGES(8))
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

  int n_coh = 0;
  always @(posedge clk) if (rst_n && coh_valid) n_coh++;

  int live_slots;
  task automatic count_live();
    live_slots = N - int'(free_slots);
  endtask

  initial begin
    scp_stats_t b;
    int c0, hits1;
    logic [LA-1:0] a;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (init_done);

    // ---- Disjoint ---------------------------------------------------------------
    for (int i = 0; i < 16; i++) access(1, OP_READ, 20'h10000 + 20'(i), '0, '0, MODE_SCP);
    b = stats; c0 = n_coh;
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < 4 * WD * SETS; i++) access(0, OP_READ, 20'h20000 + 20'(i), '0, '0, MODE_SCP);
    hits1 = 0;
    for (int i = 0; i < 16; i++) begin
      access(1, OP_READ, 20'h10000 + 20'(i), '0, '0, MODE_SCP);
      if (lat == HIT) hits1++;
    end
    check(hits1 == 16, $sformatf("Disjoint: domain 1 hits %0d of 16 after domain 0 streamed", hits1));
    check(stats.finds == b.finds && n_coh == c0, "Disjoint: no find and no coherence message");
    check(stats.tag_evicts - b.tag_evicts >= 3 * WD * SETS, "Disjoint: domain 0 evicted its own tags");
    $display("Disjoint: domain-0 tag evictions %0d, domain-1 hits %0d/16", stats.tag_evicts - b.tag_evicts, hits1);
    check_refcounts();

    // ---- ReadShared ---------------------------------------------------------------
    b = stats;
    count_live(); c0 = live_slots;
    for (int r = 0; r < 4; r++)
      for (int i = 0; i < 32; i++) begin
        access(0, OP_READ, 20'h30000 + 20'(i), '0, '0, MODE_SCP);
        access(1, OP_READ, 20'h30000 + 20'(i), '0, '0, MODE_SCP);
      end
    count_live();
    check(stats.upgrades == b.upgrades, "ReadShared: no upgrade");
    check(stats.downgrades - b.downgrades <= 32, "ReadShared: at most one downgrade per line");
    check(stats.finds - b.finds == 32, $sformatf("ReadShared: %0d finds, one per line expected", stats.finds - b.finds));
    check(stats.hits - b.hits == 6 * 32, "ReadShared: both domains hit after the first pass");
    $display("ReadShared: finds %0d, downgrades %0d, hits %0d", stats.finds - b.finds,
             stats.downgrades - b.downgrades, stats.hits - b.hits);
    check_refcounts();

    // ---- ProdCons -----------------------------------------------------------------
    b = stats;
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < 16; i++) begin
        access(0, OP_WRITE, 20'h40000 + 20'(i), {32'(r), 32'(i)}, '1, MODE_SCP);
        access(1, OP_READ, 20'h40000 + 20'(i), '0, '0, MODE_SCP);
        check(rdata == {32'(r), 32'(i)}, "ProdCons: consumer sees the produced value");
      end
    check(stats.downgrades - b.downgrades == 48, $sformatf("ProdCons: %0d downgrades, 48 expected", stats.downgrades - b.downgrades));
    check(stats.upgrades - b.upgrades == 32, $sformatf("ProdCons: %0d upgrades, 32 expected", stats.upgrades - b.upgrades));
    $display("ProdCons: downgrades %0d, upgrades %0d", stats.downgrades - b.downgrades, stats.upgrades - b.upgrades);
    check_refcounts();

    // ---- LockContend ----------------------------------------------------------------
    b = stats;
    for (int i = 0; i < 40; i++) access(i % 2, OP_WRITE, 20'h50001, 64'(i), 8'h0F, MODE_SCP);
    access(1, OP_READ, 20'h50001, '0, '0, MODE_SCP);
    check(rdata[31:0] == 32'd39, "LockContend: last lock value");
    check(stats.upgrades - b.upgrades == 39, $sformatf("LockContend: %0d upgrades, 39 expected", stats.upgrades - b.upgrades));
    check_refcounts();

    // ---- AsyncShare -------------------------------------------------------------------
    b = stats;
    for (int r = 0; r < 6; r++) begin
      for (int i = 0; i < 24; i++) access(r % 2, OP_READ, 20'h60000 + 20'(i * SETS + r), '0, '0, MODE_SCP);
      access(r % 2, OP_WRITE, 20'h70000 + 20'(r % 4), {$urandom, $urandom}, '1, MODE_SCP);
      access((r + 1) % 2, OP_READ, 20'h70000 + 20'(r % 4), '0, '0, MODE_SCP);
    end
    check(stats.finds > b.finds, "AsyncShare: shared region found across domains");
    check_refcounts();

    // ---- wt_threshold -----------------------------------------------------------------
    b = stats;
    for (int i = 0; i < 24; i++) begin
      a = 20'h08000 + 20'(i % 8);
      access(i % 2, OP_WRITE, a, {32'hABCD, 32'(i)}, '1, MODE_ADAPTIVE);
      access((i + 1) % 2, OP_READ, a, '0, '0, MODE_ADAPTIVE);
      if (stats.promotions != b.promotions && c0 >= 0) begin
        c0 = -1;
        $display("wt_threshold: page promoted after %0d downgrades", stats.downgrades - b.downgrades);
        check(stats.downgrades - b.downgrades == 5, "wt_threshold: promotion at T_leak+1 downgrades");
        b.downgrades = stats.downgrades;
        b.wt_stores = stats.wt_stores;
      end
    end
    check(c0 == -1, "wt_threshold: page promoted");
    check(stats.downgrades == b.downgrades, "wt_threshold: no downgrade after promotion");
    check(stats.wt_stores > b.wt_stores, "wt_threshold: stores write-through after promotion");
    check_refcounts();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
