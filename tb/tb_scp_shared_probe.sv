// tb_scp_shared_probe: the shared-writeable-line probe experiment. An
// attacker domain and a victim domain share one line (a cross-domain lock or
// ring head). In each trial the victim writes the line with probability 1/4
// (v = 1) or leaves it (v = 0), and the attacker then reads it and times the
// read. Private caches acknowledge coherence messages after 49 cycles.
//  * SCP (permissive) page: a victim write leaves the line M in the victim's
//    private cache, so the attacker's read must wait for a downgrade; the
//    mean latencies for v = 1 and v = 0 differ, as the mode allows.
//  * SCP-WT page: the victim's store is written through and the line stays
//    S; the attacker's read is a 20-cycle hit whatever the victim did.
//  * SCP-adaptive page: the first downgrades leak until the page passes
//    its budget (T_leak = 8) and is promoted; after that, as with SCP-WT,
//    every probe takes 20 cycles.
// Every trial's data is checked against a reference image.
module tb_scp_shared_probe;
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
            .T_MISS(TM), .BF_M(256), .BF_K(3), .T_LEAK(8), .WINDOW(1000000), .LEAK_PAGES(4))
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
      else ack_cnt <= 49 - 1;
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
    if (stats.hits != s0.hits && stats.downgrades == s0.downgrades && stats.upgrades == s0.upgrades)
      check(lat == HIT, $sformatf("hit latency %0d", lat));
    else if (stats.hits != s0.hits)
      check(lat == HIT || lat == 6 + 49, $sformatf("hit latency %0d waiting for an acknowledgement", lat));
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

  int sum [2], cnt [2], leaked;
  task automatic run_mode(page_mode_e mode, logic [LA-1:0] a, int trials);
    int v;
    sum = '{0, 0}; cnt = '{0, 0};
    for (int t = 0; t < trials; t++) begin
      v = ($urandom_range(0, 3) == 0);
      if (v) access(1, OP_WRITE, a, {$urandom, $urandom}, '1, mode);
      access(0, OP_READ, a, '0, '0, mode);
      sum[v] += lat; cnt[v]++;
    end
  endtask

  initial begin
    real m0, m1;
    int dg0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (init_done);

    // permissive
    access(0, OP_READ, 16'h1000, '0, '0, MODE_SCP);
    access(1, OP_READ, 16'h1000, '0, '0, MODE_SCP);
    run_mode(MODE_SCP, 16'h1000, 400);
    m0 = real'(sum[0]) / cnt[0]; m1 = real'(sum[1]) / cnt[1];
    $display("SCP-permissive: v=0 %0.2f cy, v=1 %0.2f cy, gap %0.2f (%0d/%0d trials)", m0, m1, m1 - m0, cnt[0], cnt[1]);
    check(cnt[0] > 0 && cnt[1] > 0, "permissive: both victim conditions occurred");
    check(m0 == HIT && m1 > HIT, "permissive: the gap stays open, as the mode allows");

    // write-through
    access(0, OP_READ, 16'h2000, '0, '0, MODE_WT);
    access(1, OP_READ, 16'h2000, '0, '0, MODE_WT);
    run_mode(MODE_WT, 16'h2000, 400);
    m0 = real'(sum[0]) / cnt[0]; m1 = real'(sum[1]) / cnt[1];
    $display("SCP-WT:         v=0 %0.2f cy, v=1 %0.2f cy, gap %0.2f (%0d/%0d trials)", m0, m1, m1 - m0, cnt[0], cnt[1]);
    check(cnt[0] > 0 && cnt[1] > 0, "WT: both victim conditions occurred");
    check(m0 == HIT && m1 == HIT, "WT: no gap");

    // adaptive: run until promoted, then measure
    dg0 = stats.downgrades;
    access(0, OP_READ, 16'h3000, '0, '0, MODE_ADAPTIVE);
    access(1, OP_READ, 16'h3000, '0, '0, MODE_ADAPTIVE);
    leaked = 0;
    for (int t = 0; t < 200 && stats.promotions == 0; t++) begin
      access(1, OP_WRITE, 16'h3000, {$urandom, $urandom}, '1, MODE_ADAPTIVE);
      access(0, OP_READ, 16'h3000, '0, '0, MODE_ADAPTIVE);
      if (lat > HIT) leaked++;
    end
    $display("SCP-adaptive: promoted after %0d slow probes", leaked);
    check(stats.promotions == 1 && stats.downgrades - dg0 == 9 && leaked == 8,
          "adaptive: promoted after T_leak+1 downgrades (one in the set-up reads)");
    run_mode(MODE_ADAPTIVE, 16'h3000, 400);
    m0 = real'(sum[0]) / cnt[0]; m1 = real'(sum[1]) / cnt[1];
    $display("SCP-adaptive:   v=0 %0.2f cy, v=1 %0.2f cy, gap %0.2f (%0d/%0d trials)", m0, m1, m1 - m0, cnt[0], cnt[1]);
    check(cnt[0] > 0 && cnt[1] > 0, "adaptive: both victim conditions occurred");
    check(m0 == HIT && m1 == HIT, "adaptive: no gap after promotion");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
