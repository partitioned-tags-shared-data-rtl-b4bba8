// scp_leak_monitor: per-page leakage budget for SCP-adaptive pages.
//
// On a page in adaptive mode, shared-writeable lines follow plain MESI until
// the page has seen more than T_leak cross-domain E/M->S downgrades within
// one time window. Such a downgrade is the observable event of the
// coherence timing channel, so T_leak bounds what leaks per window. When the
// budget is exceeded the page is promoted to write-through: from then on the
// monitor reports it as write-through to the controller and raises
// `promote_valid` with the page number, so that system software can record
// the new mode in the page's 2-bit field. T_leak = 0 makes adaptive pages
// behave as write-through from the start.
//
// The counters form a fully associative table of PAGES entries {page,
// count, promoted}. A downgrade event on a page not in the table takes a
// free entry, else the first entry not yet promoted, else a round-robin one.
// At the end of each window of WINDOW cycles all counts clear; promotions
// stay. The paper asks for one counter per page next to the TLB; the table
// size and its replacement are this design's choices.
//
// Interface and timing: `ev_valid`/`ev_page` count one downgrade on the
// clock edge; the promotion pulse follows one cycle later. `q_page`/`q_mode`
// -> `q_wt` is combinational: the effective write-through decision for an
// access.
module scp_leak_monitor #(
  parameter int unsigned PAGE_BITS = scp_pkg::DEF_LADDR_BITS - scp_pkg::PAGE_LINE_BITS,
  parameter int unsigned PAGES     = scp_pkg::DEF_LEAK_PAGES,
  parameter int unsigned T_LEAK    = scp_pkg::DEF_T_LEAK,
  parameter int unsigned WINDOW    = scp_pkg::DEF_WINDOW,
  localparam int unsigned CNT_BITS = $clog2(T_LEAK + 2),
  localparam int unsigned PI_BITS  = (PAGES > 1) ? $clog2(PAGES) : 1,
  localparam int unsigned WIN_BITS = $clog2(WINDOW + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ev_valid,
  input  logic [PAGE_BITS-1:0] ev_page,
  input  logic [PAGE_BITS-1:0] q_page,
  input  scp_pkg::page_mode_e  q_mode,
  output logic                 q_wt,
  output logic                 promote_valid,
  output logic [PAGE_BITS-1:0] promote_page
);
  import scp_pkg::*;

  typedef struct packed {
    logic                 valid;
    logic                 promoted;
    logic [PAGE_BITS-1:0] page;
    logic [CNT_BITS-1:0]  count;
  } entry_t;

  entry_t               tab [PAGES];
  logic [WIN_BITS-1:0]  win_cnt;
  logic [PI_BITS-1:0]   rr;
  logic                 win_end;
  assign win_end = (win_cnt == WIN_BITS'(WINDOW - 1));

  // effective mode of an access
  always_comb begin
    q_wt = (q_mode == MODE_WT);
    if (q_mode == MODE_ADAPTIVE || q_mode == MODE_RSVD) begin
      if (T_LEAK == 0) q_wt = 1'b1;
      for (int i = 0; i < PAGES; i++) begin
        if (tab[i].valid && tab[i].promoted && tab[i].page == q_page) q_wt = 1'b1;
      end
    end
  end

  // entry lookup / choice for a downgrade event
  logic               ev_hit;
  logic [PI_BITS-1:0] ev_idx, free_idx, np_idx;
  logic               have_free, have_np;
  always_comb begin
    ev_hit = 1'b0; ev_idx = '0;
    have_free = 1'b0; free_idx = '0;
    have_np = 1'b0; np_idx = '0;
    for (int i = PAGES - 1; i >= 0; i--) begin
      if (tab[i].valid && tab[i].page == ev_page) begin ev_hit = 1'b1; ev_idx = PI_BITS'(i); end
      if (!tab[i].valid) begin have_free = 1'b1; free_idx = PI_BITS'(i); end
      if (tab[i].valid && !tab[i].promoted) begin have_np = 1'b1; np_idx = PI_BITS'(i); end
    end
  end

  logic [PI_BITS-1:0]  sel;
  logic [CNT_BITS-1:0] cur;
  always_comb begin
    sel = ev_hit ? ev_idx : have_free ? free_idx : have_np ? np_idx : rr;
    cur = ev_hit ? tab[ev_idx].count : '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < PAGES; i++) tab[i] <= '0;
      win_cnt       <= '0;
      rr            <= '0;
      promote_valid <= 1'b0;
      promote_page  <= '0;
    end else begin
      promote_valid <= 1'b0;
      win_cnt <= win_end ? '0 : win_cnt + 1'b1;
      if (win_end) begin
        for (int i = 0; i < PAGES; i++) tab[i].count <= '0;
      end
      if (ev_valid) begin
        if (!ev_hit && !have_free && !have_np)
          rr <= (rr == PI_BITS'(PAGES - 1)) ? '0 : rr + 1'b1;
        if (!(ev_hit && tab[ev_idx].promoted)) begin
          tab[sel].valid <= 1'b1;
          tab[sel].page  <= ev_page;
          if (!ev_hit) tab[sel].promoted <= 1'b0;
          // an event in the last cycle of a window still counts
          if (cur != CNT_BITS'(T_LEAK + 1)) tab[sel].count <= cur + 1'b1;
          if (cur + 1'b1 > CNT_BITS'(T_LEAK)) begin
            tab[sel].promoted <= 1'b1;
            promote_valid     <= 1'b1;
            promote_page      <= ev_page;
          end
        end
      end
    end
  end
endmodule
