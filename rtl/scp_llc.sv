// scp_llc: one slice of the SCP (secure and coherent partitioning) LLC.
//
// The tags of the cache are partitioned per security domain: domain d owns
// W_d ways in every set, and nothing another domain does can change them.
// The data is not partitioned: a single pool of N = D*W_d*SETS entries, as
// many as there are tags, holds the lines, and each tag reaches its line
// through a forward pointer. A line cached by several domains has one data
// entry, one coherence state and one refcount, with one tag per domain
// pointing at it, so write-shared lines stay coherent without copies. Since
// the pool has a slot for every tag, no line is ever displaced for lack of
// data space; a slot frees only when the last tag pointing at it is evicted
// by its own domain.
//
// Blocks: D tag partitions (scp_tag_partition), the cross-partition match
// (scp_peer_find), the data pool (scp_data_array), its free list
// (scp_free_list), the counting Bloom filter in front of PeerProbe
// (scp_bloom_filter), the constant-time response release
// (scp_latency_mask), the per-page leakage budget (scp_leak_monitor) and
// the controller (scp_ctrl).
//
// Ports: a request channel from the domains' private cache hierarchies
// (valid/ready; domain id, read or write, line address, write data with
// byte enables, the page's 2-bit mode from the TLB), a response pulse with
// the line; a memory read channel and a writeback channel; coherence
// messages to the private caches (invalidate, downgrade, posted
// invalidate) with an acknowledgement; page-promotion notices for system
// software; `bf_enable` to switch the Bloom filter off; event counters.
// Timing: after reset the slice sweeps its tag arrays and Bloom filter
// (`init_done`). A hit answers HIT_LAT cycles after acceptance, every
// PeerProbe (line found in another partition or not) at T_MISS cycles, or
// later if memory is slower or a coherence acknowledgement is outstanding.
// One request is in flight at a time (this design's simplification).
// `free_slots` reports how many data slots are free (live + free = N).
// Two sub-block outputs are left unread on purpose: the peer match's domain
// number (the controller needs only the forward pointer) and the latency
// mask's cycle count (the controller needs only its release signal).
module scp_llc #(
  parameter int unsigned D          = scp_pkg::DEF_D,
  parameter int unsigned WD         = scp_pkg::DEF_WD,
  parameter int unsigned SETS       = scp_pkg::DEF_SETS,
  parameter int unsigned LADDR_BITS = scp_pkg::DEF_LADDR_BITS,
  parameter int unsigned LINE_BITS  = scp_pkg::DEF_LINE_BITS,
  parameter int unsigned HIT_LAT    = scp_pkg::DEF_HIT_LAT,
  parameter int unsigned T_MISS     = scp_pkg::DEF_T_MISS,
  parameter int unsigned BF_M       = scp_pkg::DEF_BF_M,
  parameter int unsigned BF_K       = scp_pkg::DEF_BF_K,
  parameter int unsigned T_LEAK     = scp_pkg::DEF_T_LEAK,
  parameter int unsigned WINDOW     = scp_pkg::DEF_WINDOW,
  parameter int unsigned LEAK_PAGES = scp_pkg::DEF_LEAK_PAGES,
  localparam int unsigned N         = D * WD * SETS,
  localparam int unsigned FP_BITS   = $clog2(N),
  localparam int unsigned SET_BITS  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned TAG_BITS  = LADDR_BITS - SET_BITS,
  localparam int unsigned WAY_BITS  = (WD > 1) ? $clog2(WD) : 1,
  localparam int unsigned DOM_BITS  = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned RC_BITS   = $clog2(D + 1),
  localparam int unsigned BE_BITS   = LINE_BITS / 8,
  localparam int unsigned PAGE_BITS = LADDR_BITS - scp_pkg::PAGE_LINE_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic                  init_done,
  input  logic                  bf_enable,
  // requests
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic [DOM_BITS-1:0]   req_dom,
  input  scp_pkg::op_e          req_op,
  input  logic [LADDR_BITS-1:0] req_addr,
  input  logic [LINE_BITS-1:0]  req_wdata,
  input  logic [BE_BITS-1:0]    req_be,
  input  scp_pkg::page_mode_e   req_mode,
  output logic                  rsp_valid,
  output logic [DOM_BITS-1:0]   rsp_dom,
  output logic [LINE_BITS-1:0]  rsp_rdata,
  // memory
  output logic                  mem_rd_valid,
  input  logic                  mem_rd_ready,
  output logic [LADDR_BITS-1:0] mem_rd_addr,
  input  logic                  mem_rsp_valid,
  input  logic [LINE_BITS-1:0]  mem_rsp_data,
  output logic                  mem_wb_valid,
  input  logic                  mem_wb_ready,
  output logic [LADDR_BITS-1:0] mem_wb_addr,
  output logic [LINE_BITS-1:0]  mem_wb_data,
  // private-cache coherence
  output logic                  coh_valid,
  input  logic                  coh_ready,
  output scp_pkg::coh_e         coh_type,
  output logic [D-1:0]          coh_mask,
  output logic [LADDR_BITS-1:0] coh_addr,
  input  logic                  coh_ack,
  // page promotion notice
  output logic                  promote_valid,
  output logic [PAGE_BITS-1:0]  promote_page,
  // measurement
  output scp_pkg::scp_stats_t   stats,
  output logic                  bf_sat_event,
  output logic                  mask_overrun,
  output logic [FP_BITS:0]      free_slots
);
  // tag partitions
  logic [D-1:0]          pt_ready, pt_lk_en, pt_upd_en, pt_hit, pt_vic_valid;
  logic [SET_BITS-1:0]   pt_set;
  logic [TAG_BITS-1:0]   pt_tag;
  logic [1:0]            pt_upd_op;
  logic [WAY_BITS-1:0]   pt_upd_way;
  logic [FP_BITS-1:0]    pt_upd_fp;
  logic [WAY_BITS-1:0]   pt_way [D];
  logic [FP_BITS-1:0]    pt_fp [D];
  logic [WAY_BITS-1:0]   pt_vic_way [D];
  logic [TAG_BITS-1:0]   pt_vic_tag [D];
  logic [FP_BITS-1:0]    pt_vic_fp [D];

  for (genvar g = 0; g < D; g++) begin : g_part
    scp_tag_partition #(.WD(WD), .SETS(SETS), .TAG_BITS(TAG_BITS), .FP_BITS(FP_BITS)) u_part (
      .clk, .rst_n, .ready(pt_ready[g]),
      .lk_en(pt_lk_en[g]), .lk_set(pt_set), .lk_tag(pt_tag),
      .lk_hit(pt_hit[g]), .lk_way(pt_way[g]), .lk_fp(pt_fp[g]),
      .vic_way(pt_vic_way[g]), .vic_valid(pt_vic_valid[g]), .vic_tag(pt_vic_tag[g]), .vic_fp(pt_vic_fp[g]),
      .upd_en(pt_upd_en[g]), .upd_op(pt_upd_op), .upd_set(pt_set), .upd_way(pt_upd_way),
      .upd_tag(pt_tag), .upd_fp(pt_upd_fp));
  end

  // cross-partition find
  logic [D-1:0]          peer_en;
  logic [DOM_BITS-1:0]   find_dom, peer_dom;
  logic                  own_hit, own_vic_valid, peer_hit, peer_conflict;
  logic [WAY_BITS-1:0]   own_way, own_vic_way;
  logic [FP_BITS-1:0]    own_fp, own_vic_fp, peer_fp;
  logic [TAG_BITS-1:0]   own_vic_tag;

  scp_peer_find #(.D(D), .WAY_BITS(WAY_BITS), .TAG_BITS(TAG_BITS), .FP_BITS(FP_BITS)) u_find (
    .req_dom(find_dom), .peer_en, .pt_hit, .pt_fp, .pt_way, .pt_vic_way, .pt_vic_valid,
    .pt_vic_tag, .pt_vic_fp, .own_hit, .own_way, .own_fp, .own_vic_way, .own_vic_valid,
    .own_vic_tag, .own_vic_fp, .peer_hit, .peer_fp, .peer_dom, .peer_conflict);

  // data array
  logic                  da_rd_en, da_wr_meta_en, da_wr_data_en, da_rd_dirty, da_wr_dirty;
  logic [FP_BITS-1:0]    da_rd_idx, da_wr_idx;
  scp_pkg::mesi_e        da_rd_state, da_wr_state;
  logic [RC_BITS-1:0]    da_rd_rc, da_wr_rc;
  logic [D-1:0]          da_rd_sharers, da_wr_sharers;
  logic [LINE_BITS-1:0]  da_rd_data, da_wr_data;
  logic [BE_BITS-1:0]    da_wr_be;

  scp_data_array #(.N(N), .D(D), .LINE_BITS(LINE_BITS)) u_data (
    .clk, .rd_en(da_rd_en), .rd_idx(da_rd_idx), .rd_state(da_rd_state), .rd_dirty(da_rd_dirty),
    .rd_rc(da_rd_rc), .rd_sharers(da_rd_sharers), .rd_data(da_rd_data),
    .wr_meta_en(da_wr_meta_en), .wr_data_en(da_wr_data_en), .wr_idx(da_wr_idx),
    .wr_state(da_wr_state), .wr_dirty(da_wr_dirty), .wr_rc(da_wr_rc), .wr_sharers(da_wr_sharers),
    .wr_data(da_wr_data), .wr_be(da_wr_be));

  // free list
  logic                  fl_alloc, fl_empty, fl_free;
  logic [FP_BITS-1:0]    fl_alloc_idx, fl_free_idx;
  logic [FP_BITS:0]      fl_n_free;
  assign free_slots = fl_n_free;

  scp_free_list #(.N(N)) u_free (
    .clk, .rst_n, .alloc(fl_alloc), .alloc_idx(fl_alloc_idx), .empty(fl_empty),
    .free(fl_free), .free_idx(fl_free_idx), .n_free(fl_n_free));

  // Bloom filter
  logic                  bf_op_valid, bf_busy, bf_done, bf_maybe;
  logic [1:0]            bf_op;
  logic [LADDR_BITS-1:0] bf_addr;

  scp_bloom_filter #(.M(BF_M), .K(BF_K), .ADDR_BITS(LADDR_BITS)) u_bloom (
    .clk, .rst_n, .enable(bf_enable), .op_valid(bf_op_valid), .op(bf_op), .op_addr(bf_addr),
    .busy(bf_busy), .done(bf_done), .maybe(bf_maybe), .sat_event(bf_sat_event));

  // latency mask
  logic                  lm_start, lm_data_ready, lm_release;
  logic [15:0]           lm_target, lm_elapsed;

  scp_latency_mask #(.CNT_BITS(16)) u_mask (
    .clk, .rst_n, .start(lm_start), .target(lm_target), .data_ready(lm_data_ready),
    .release_ok(lm_release), .overrun(mask_overrun), .elapsed(lm_elapsed));

  // leakage monitor
  logic                  lk_ev_valid, lk_q_wt;
  logic [PAGE_BITS-1:0]  lk_ev_page, lk_q_page;
  scp_pkg::page_mode_e   lk_q_mode;

  scp_leak_monitor #(.PAGE_BITS(PAGE_BITS), .PAGES(LEAK_PAGES), .T_LEAK(T_LEAK), .WINDOW(WINDOW)) u_leak (
    .clk, .rst_n, .ev_valid(lk_ev_valid), .ev_page(lk_ev_page), .q_page(lk_q_page),
    .q_mode(lk_q_mode), .q_wt(lk_q_wt), .promote_valid, .promote_page);

  // controller
  logic sub_ready;
  assign sub_ready = (&pt_ready) && !bf_busy;

  always_ff @(posedge clk) begin
    if (!rst_n) init_done <= 1'b0;
    else if (sub_ready) init_done <= 1'b1;
  end

  scp_ctrl #(.D(D), .WD(WD), .SETS(SETS), .LADDR_BITS(LADDR_BITS), .LINE_BITS(LINE_BITS),
             .HIT_LAT(HIT_LAT), .T_MISS(T_MISS)) u_ctrl (
    .clk, .rst_n, .sub_ready(init_done && sub_ready),
    .req_valid, .req_ready, .req_dom, .req_op, .req_addr, .req_wdata, .req_be, .req_mode,
    .rsp_valid, .rsp_dom, .rsp_rdata,
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rsp_valid, .mem_rsp_data,
    .mem_wb_valid, .mem_wb_ready, .mem_wb_addr, .mem_wb_data,
    .coh_valid, .coh_ready, .coh_type, .coh_mask, .coh_addr, .coh_ack,
    .pt_lk_en, .pt_set, .pt_tag, .pt_upd_en, .pt_upd_op, .pt_upd_way, .pt_upd_fp,
    .peer_en, .find_dom, .own_hit, .own_way, .own_fp, .own_vic_way, .own_vic_valid,
    .own_vic_tag, .own_vic_fp, .peer_hit, .peer_fp, .peer_conflict,
    .da_rd_en, .da_rd_idx, .da_rd_state, .da_rd_dirty, .da_rd_rc, .da_rd_sharers, .da_rd_data,
    .da_wr_meta_en, .da_wr_data_en, .da_wr_idx, .da_wr_state, .da_wr_dirty, .da_wr_rc,
    .da_wr_sharers, .da_wr_data, .da_wr_be,
    .fl_alloc, .fl_alloc_idx, .fl_empty, .fl_free, .fl_free_idx,
    .bf_op_valid, .bf_op, .bf_addr, .bf_busy, .bf_done, .bf_maybe,
    .lm_start, .lm_target, .lm_data_ready, .lm_release,
    .lk_ev_valid, .lk_ev_page, .lk_q_page, .lk_q_mode, .lk_q_wt, .promote_pulse(promote_valid),
    .stats);
endmodule
