// tb_scp_leak_monitor: self-checking test of the per-page leakage budget.
// With T_leak = 3 and a 200-cycle window: three downgrades on a page do not
// promote it, the fourth does (one pulse, naming the page); a promoted
// adaptive page reads back as write-through, a permissive page never does;
// counts clear at a window boundary; the table replaces unpromoted entries
// when full. Then, after a fresh reset, 4000 cycles of random downgrade
// events on six pages (more than the table holds) and random queries are
// compared every cycle with a reference model of the budget: per-page
// counts cleared every WINDOW cycles, promotion on the (T_leak+1)-th event,
// replacement of a free entry, else the lowest unpromoted one, else round
// robin.
module tb_scp_leak_monitor;
  localparam int PB = 12, PAGES = 4, T_LEAK = 3, WINDOW = 200;
  logic clk = 0, rst_n = 0, ev_valid = 0, q_wt, promote_valid;
  logic [PB-1:0] ev_page = '0, q_page = '0, promote_page;
  scp_pkg::page_mode_e q_mode = scp_pkg::MODE_ADAPTIVE;
  scp_leak_monitor #(.PAGE_BITS(PB), .PAGES(PAGES), .T_LEAK(T_LEAK), .WINDOW(WINDOW)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int promos = 0;
  logic [PB-1:0] last_promo;
  always @(posedge clk) if (rst_n && promote_valid) begin promos++; last_promo = promote_page; end

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic event_on(logic [PB-1:0] p);
    @(negedge clk); ev_valid = 1; ev_page = p;
    @(negedge clk); ev_valid = 0;
  endtask
  bit wt_r;
  task automatic wt(logic [PB-1:0] p, scp_pkg::page_mode_e m);
    q_page = p; q_mode = m;
    #1;
    wt_r = q_wt;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    wt(12'h010, scp_pkg::MODE_WT); check(wt_r == 1, "WT page is write-through");
    wt(12'h010, scp_pkg::MODE_SCP); check(wt_r == 0, "permissive page is not");
    for (int i = 0; i < T_LEAK; i++) event_on(12'h010);
    @(negedge clk);
    #1 check(promos == 0, "no promotion at T_leak events");
    wt(12'h010, scp_pkg::MODE_ADAPTIVE); check(wt_r == 0, "adaptive page before budget");
    event_on(12'h010);
    @(negedge clk);
    check(promos == 1 && last_promo == 12'h010, "promotion after T_leak+1 events");
    wt(12'h010, scp_pkg::MODE_ADAPTIVE); check(wt_r == 1, "promoted page is write-through");
    wt(12'h010, scp_pkg::MODE_SCP); check(wt_r == 0, "permissive mode ignores promotion");
    wt(12'h011, scp_pkg::MODE_ADAPTIVE); check(wt_r == 0, "other page unaffected");
    event_on(12'h010);
    @(negedge clk);
    check(promos == 1, "no second promotion");
    // window boundary clears counts
    while ((cyc % WINDOW) != 20) @(negedge clk);
    for (int i = 0; i < T_LEAK; i++) event_on(12'h020);
    while ((cyc % WINDOW) != 10) @(negedge clk);
    for (int i = 0; i < T_LEAK; i++) event_on(12'h020);
    @(negedge clk);
    check(promos == 1, "counts cleared at window end");
    wt(12'h010, scp_pkg::MODE_RSVD); check(wt_r == 1, "promotion survives window end");
    // fill the table; the promoted entry must survive replacement
    for (int p = 0; p < 6; p++) event_on(12'h100 + 12'(p));
    wt(12'h010, scp_pkg::MODE_ADAPTIVE); check(wt_r == 1, "promoted entry kept when table full");
    for (int i = 0; i < T_LEAK + 1; i++) event_on(12'h200);
    @(negedge clk);
    check(promos == 2 && last_promo == 12'h200, "promotion with full table");
    // ---- random phase against the reference model -------------------------
    @(negedge clk); rst_n = 0; ev_valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1; model_on = 1;
    for (int c = 0; c < 4000; c++) begin
      ev_valid = ($urandom_range(0, 2) == 0);
      ev_page  = 12'h300 + 12'($urandom_range(0, 5));
      wt(12'h300 + 12'($urandom_range(0, 6)), scp_pkg::page_mode_e'($urandom_range(0, 3)));
      check(wt_r == model_wt(q_page, q_mode), $sformatf("random: write-through answer, page %h", q_page));
      @(negedge clk);
      check(promote_valid == m_pv && (!m_pv || promote_page == m_pp), "random: promotion pulse");
    end
    $display("random phase: %0d promotions", m_promos);
    check(m_promos > 3, "random phase promoted pages");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model of the leakage table
  bit model_on = 0;
  bit m_valid [PAGES], m_prom [PAGES], m_pv;
  int m_page [PAGES], m_cnt [PAGES], m_rr, m_win, m_pp, m_promos = 0;
  function automatic bit model_wt(logic [PB-1:0] p, scp_pkg::page_mode_e m);
    if (m == scp_pkg::MODE_WT) return 1;
    if (m == scp_pkg::MODE_SCP) return 0;
    for (int i = 0; i < PAGES; i++) if (m_valid[i] && m_prom[i] && m_page[i] == int'(p)) return 1;
    return 0;
  endfunction
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < PAGES; i++) begin m_valid[i] = 0; m_prom[i] = 0; m_page[i] = 0; m_cnt[i] = 0; end
      m_rr = 0; m_win = 0; m_pv = 0;
    end else if (model_on) begin
      int hit, sel;
      m_pv = 0;
      hit = -1;
      for (int i = 0; i < PAGES; i++) if (m_valid[i] && m_page[i] == int'(ev_page)) hit = i;
      if (m_win == WINDOW - 1) for (int i = 0; i < PAGES; i++) m_cnt[i] = 0;
      if (ev_valid && !(hit >= 0 && m_prom[hit])) begin
        int cnt_before;
        if (hit >= 0) sel = hit;
        else begin
          sel = -1;
          for (int i = PAGES - 1; i >= 0; i--) if (!m_valid[i]) sel = i;
          if (sel < 0) for (int i = PAGES - 1; i >= 0; i--) if (!m_prom[i]) sel = i;
          if (sel < 0) begin sel = m_rr; m_rr = (m_rr + 1) % PAGES; end
        end
        cnt_before = (hit >= 0) ? m_cnt_pre(hit) : 0;
        m_valid[sel] = 1; m_page[sel] = int'(ev_page);
        if (hit < 0) m_prom[sel] = 0;
        m_cnt[sel] = cnt_before + 1;
        if (cnt_before + 1 > T_LEAK) begin m_prom[sel] = 1; m_pv = 1; m_pp = int'(ev_page); m_promos++; end
      end
      m_win = (m_win == WINDOW - 1) ? 0 : m_win + 1;
    end
  end
  // count of an entry before this cycle's window clear (the clear and an
  // event in the same cycle: the event counts on top of the old value)
  int m_cnt_q [PAGES];
  function automatic int m_cnt_pre(int i);
    return m_cnt_q[i];
  endfunction
  always @(negedge clk) for (int i = 0; i < PAGES; i++) m_cnt_q[i] = m_cnt[i];
endmodule
