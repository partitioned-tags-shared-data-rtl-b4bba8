// scp_ctrl: request sequencer of the SCP last-level-cache slice.
//
// One request at a time from security domain d for line X runs through the
// operations of the design:
//  * Lookup: read the addressed set of d's own tag partition. On a match the
//    forward pointer names the data entry; the LRU of d's partition is
//    updated and the response is released at the hit latency.
//  * PeerProbe: on a miss in d's partition, ask the counting Bloom filter;
//    if it answers "maybe", read the same set in the other D-1 partitions in
//    parallel. If one holds X, evict d's LRU tag if needed, write a new tag
//    in d's partition pointing at the existing data entry and increment its
//    refcount. Nothing is copied. Found or not, the response is held until
//    T_miss cycles after acceptance.
//  * Allocate (true miss): issue the memory read first, then evict d's
//    victim tag while memory is busy. If that eviction frees a data slot it
//    becomes the new line's slot, else a slot is taken from the free list.
//  * Evict: invalidate the victim tag in d's partition, clear d's bit in the
//    line's sharer vector and decrement the refcount. At zero the entry goes
//    to I, is written back if dirty, leaves the Bloom filter and its slot is
//    free. No other partition's tags are ever touched.
//  * Read/Write on the data entry (the only coherence state of the line):
//    a read of an E/M line held privately by another domain downgrades it to
//    S (the cross-domain downgrade, reported to the leakage monitor); a read
//    with no other holder gives E. A write with no other holder goes to M;
//    otherwise it is an S->M upgrade that invalidates the other holders and
//    waits for their acknowledgement. On a write-through page (SCP-WT, or an
//    adaptive page past its leakage budget) lines never enter E or M: reads
//    get S, stores update the LLC copy, stay in S and send posted
//    invalidations without waiting, so their latency does not depend on
//    whether another domain holds the line.
//
// Interfaces: request valid/ready (`req_*`, accepted only in idle), one-cycle
// response pulse `rsp_valid` with the line after the access; memory read
// request valid/ready with a later `mem_rsp_valid`; writeback valid/ready;
// coherence messages valid/ready with `coh_ack` for the acknowledged kinds;
// and the sub-block ports named after the blocks (pt_ tag partitions, da_
// data array, fl_ free list, bf_ Bloom filter, lm_ latency mask, lk_ leakage
// monitor). The paper gives the operations and their order; the cycle
// schedule, the single outstanding request, and holding the response until
// the coherence acknowledgements are in are this design's choices.
module scp_ctrl #(
  parameter int unsigned D          = scp_pkg::DEF_D,
  parameter int unsigned WD         = scp_pkg::DEF_WD,
  parameter int unsigned SETS       = scp_pkg::DEF_SETS,
  parameter int unsigned LADDR_BITS = scp_pkg::DEF_LADDR_BITS,
  parameter int unsigned LINE_BITS  = scp_pkg::DEF_LINE_BITS,
  parameter int unsigned HIT_LAT    = scp_pkg::DEF_HIT_LAT,
  parameter int unsigned T_MISS     = scp_pkg::DEF_T_MISS,
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
  input  logic                  sub_ready,
  // requests from the domains
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
  // coherence messages to the private caches
  output logic                  coh_valid,
  input  logic                  coh_ready,
  output scp_pkg::coh_e         coh_type,
  output logic [D-1:0]          coh_mask,
  output logic [LADDR_BITS-1:0] coh_addr,
  input  logic                  coh_ack,
  // tag partitions (set and tag broadcast to all)
  output logic [D-1:0]          pt_lk_en,
  output logic [SET_BITS-1:0]   pt_set,
  output logic [TAG_BITS-1:0]   pt_tag,
  output logic [D-1:0]          pt_upd_en,
  output logic [1:0]            pt_upd_op,
  output logic [WAY_BITS-1:0]   pt_upd_way,
  output logic [FP_BITS-1:0]    pt_upd_fp,
  output logic [D-1:0]          peer_en,
  output logic [DOM_BITS-1:0]   find_dom,
  input  logic                  own_hit,
  input  logic [WAY_BITS-1:0]   own_way,
  input  logic [FP_BITS-1:0]    own_fp,
  input  logic [WAY_BITS-1:0]   own_vic_way,
  input  logic                  own_vic_valid,
  input  logic [TAG_BITS-1:0]   own_vic_tag,
  input  logic [FP_BITS-1:0]    own_vic_fp,
  input  logic                  peer_hit,
  input  logic [FP_BITS-1:0]    peer_fp,
  input  logic                  peer_conflict,
  // data array
  output logic                  da_rd_en,
  output logic [FP_BITS-1:0]    da_rd_idx,
  input  scp_pkg::mesi_e        da_rd_state,
  input  logic                  da_rd_dirty,
  input  logic [RC_BITS-1:0]    da_rd_rc,
  input  logic [D-1:0]          da_rd_sharers,
  input  logic [LINE_BITS-1:0]  da_rd_data,
  output logic                  da_wr_meta_en,
  output logic                  da_wr_data_en,
  output logic [FP_BITS-1:0]    da_wr_idx,
  output scp_pkg::mesi_e        da_wr_state,
  output logic                  da_wr_dirty,
  output logic [RC_BITS-1:0]    da_wr_rc,
  output logic [D-1:0]          da_wr_sharers,
  output logic [LINE_BITS-1:0]  da_wr_data,
  output logic [BE_BITS-1:0]    da_wr_be,
  // free list
  output logic                  fl_alloc,
  input  logic [FP_BITS-1:0]    fl_alloc_idx,
  input  logic                  fl_empty,
  output logic                  fl_free,
  output logic [FP_BITS-1:0]    fl_free_idx,
  // Bloom filter
  output logic                  bf_op_valid,
  output logic [1:0]            bf_op,
  output logic [LADDR_BITS-1:0] bf_addr,
  input  logic                  bf_busy,
  input  logic                  bf_done,
  input  logic                  bf_maybe,
  // latency mask
  output logic                  lm_start,
  output logic [15:0]           lm_target,
  output logic                  lm_data_ready,
  input  logic                  lm_release,
  // leakage monitor
  output logic                  lk_ev_valid,
  output logic [PAGE_BITS-1:0]  lk_ev_page,
  output logic [PAGE_BITS-1:0]  lk_q_page,
  output scp_pkg::page_mode_e   lk_q_mode,
  input  logic                  lk_q_wt,
  input  logic                  promote_pulse,
  // statistics
  output scp_pkg::scp_stats_t   stats
);
  import scp_pkg::*;

  localparam logic [1:0] UPD_TOUCH = 2'd0;
  localparam logic [1:0] UPD_FILL  = 2'd1;
  localparam logic [1:0] UPD_INVAL = 2'd2;
  localparam logic [1:0] BF_QUERY  = 2'd0;
  localparam logic [1:0] BF_INSERT = 2'd1;
  localparam logic [1:0] BF_REMOVE = 2'd2;

  typedef enum logic [4:0] {
    C_IDLE, C_LOOKUP, C_BF_Q, C_BF_QW, C_PEER, C_MEMREQ, C_EVICT, C_EVICT_UPD,
    C_WB, C_BF_REM, C_BF_REMW, C_LINK, C_ALLOC, C_FILL_WAIT, C_BF_INS, C_BF_INSW,
    C_DATA_RD, C_ACCESS, C_COH, C_COH_ACK, C_RESP
  } cstate_e;

  typedef struct packed {
    logic [DOM_BITS-1:0]   dom;
    op_e                   op;
    logic [LADDR_BITS-1:0] addr;
    logic [LINE_BITS-1:0]  wdata;
    logic [BE_BITS-1:0]    be;
    page_mode_e            mode;
  } req_t;

  cstate_e              st;
  req_t                 r;
  serve_e               serve;
  logic                 link;          // PeerProbe found the line: link a tag
  logic [FP_BITS-1:0]   fp_q;          // data slot of the line
  logic                 have_slot;     // eviction freed a slot for this fill
  logic [LADDR_BITS-1:0] vic_addr;
  logic [LINE_BITS-1:0] vic_data;
  logic                 mem_done;
  logic [LINE_BITS-1:0] mem_buf;
  logic                 filled;
  mesi_e                m_state;
  logic                 m_dirty;
  logic [RC_BITS-1:0]   m_rc;
  logic [D-1:0]         m_sharers;
  logic [LINE_BITS-1:0] line_q;
  coh_e                 coh_t_q;
  logic [D-1:0]         coh_m_q;
  logic [D-1:0]         peer_en_q;
  logic [15:0]          target_q;

  logic [D-1:0] dbit;
  assign dbit = D'(1) << r.dom;

  // ---- access decision (used in C_ACCESS) ----------------------------------
  logic [D-1:0]         others;
  logic                 acc_wt, acc_need_coh, acc_downgrade, acc_upgrade;
  mesi_e                acc_state;
  logic                 acc_dirty;
  logic [D-1:0]         acc_sharers;
  logic [LINE_BITS-1:0] acc_line;
  coh_e                 acc_coh;

  always_comb begin
    others        = m_sharers & ~dbit;
    acc_wt        = lk_q_wt;
    acc_state     = m_state;
    acc_dirty     = m_dirty;
    acc_sharers   = m_sharers | dbit;
    acc_line      = line_q;
    acc_need_coh  = 1'b0;
    acc_coh       = COH_INV;
    acc_downgrade = 1'b0;
    acc_upgrade   = 1'b0;
    if (r.op == OP_READ) begin
      if (others != '0) begin
        acc_state = ST_S;
        if (m_state == ST_E || m_state == ST_M) begin
          acc_need_coh  = 1'b1;
          acc_coh       = COH_DOWNGRADE;
          acc_downgrade = 1'b1;
        end
      end else begin
        acc_state = acc_wt ? ST_S : ST_E;
      end
    end else begin
      for (int b = 0; b < BE_BITS; b++)
        if (r.be[b]) acc_line[b*8 +: 8] = r.wdata[b*8 +: 8];
      acc_dirty   = 1'b1;
      acc_sharers = dbit;
      if (acc_wt) begin
        acc_state    = ST_S;
        acc_need_coh = (others != '0);
        acc_coh      = COH_INV_POST;
      end else begin
        acc_state    = ST_M;
        acc_need_coh = (others != '0);
        acc_upgrade  = (others != '0);
      end
    end
  end

  // ---- outputs ---------------------------------------------------------------
  assign req_ready   = (st == C_IDLE) && sub_ready;
  assign pt_set      = (st == C_IDLE) ? SET_BITS'(req_addr) : SET_BITS'(r.addr);
  assign pt_tag      = (st == C_IDLE) ? TAG_BITS'(req_addr >> SET_BITS) : TAG_BITS'(r.addr >> SET_BITS);
  assign peer_en     = peer_en_q;
  assign find_dom    = r.dom;
  assign mem_rd_valid = (st == C_MEMREQ);
  assign mem_rd_addr  = r.addr;
  assign mem_wb_valid = (st == C_WB);
  assign mem_wb_addr  = vic_addr;
  assign mem_wb_data  = vic_data;
  assign coh_valid    = (st == C_COH);
  assign coh_type     = coh_t_q;
  assign coh_mask     = coh_m_q;
  assign coh_addr     = r.addr;
  assign lm_start     = req_valid && req_ready;
  assign lm_target    = target_q;
  assign lm_data_ready = (st == C_RESP);
  assign lk_q_page    = PAGE_BITS'(r.addr >> PAGE_LINE_BITS);
  assign lk_q_mode    = r.mode;
  assign lk_ev_page   = PAGE_BITS'(r.addr >> PAGE_LINE_BITS);
  assign lk_ev_valid  = (st == C_ACCESS) && acc_downgrade &&
                        (r.mode == MODE_ADAPTIVE || r.mode == MODE_RSVD);
  assign fl_alloc     = (st == C_ALLOC) && !have_slot;
  assign rsp_valid    = (st == C_RESP) && lm_release;
  assign rsp_dom      = r.dom;
  assign rsp_rdata    = line_q;

  always_comb begin
    pt_lk_en   = '0;
    pt_upd_en  = '0;
    pt_upd_op  = UPD_TOUCH;
    pt_upd_way = own_way;
    pt_upd_fp  = fp_q;
    da_rd_en   = 1'b0;
    da_rd_idx  = own_fp;
    da_wr_meta_en = 1'b0;
    da_wr_data_en = 1'b0;
    da_wr_idx     = fp_q;
    da_wr_state   = ST_I;
    da_wr_dirty   = 1'b0;
    da_wr_rc      = '0;
    da_wr_sharers = '0;
    da_wr_data    = acc_line;
    da_wr_be      = '1;
    fl_free       = 1'b0;
    fl_free_idx   = own_vic_fp;
    bf_op_valid   = 1'b0;
    bf_op         = BF_QUERY;
    bf_addr       = r.addr;
    unique case (st)
      C_IDLE:   pt_lk_en = (req_valid && req_ready) ? (D'(1) << req_dom) : '0;
      C_LOOKUP: if (own_hit) begin
        pt_upd_en = dbit;
        da_rd_en  = 1'b1;
        da_rd_idx = own_fp;
      end
      C_BF_Q:    bf_op_valid = 1'b1;
      C_BF_QW:   if (bf_done && bf_maybe) pt_lk_en = ~dbit;
      C_EVICT:   if (own_vic_valid) begin
        da_rd_en  = 1'b1;
        da_rd_idx = own_vic_fp;
      end
      C_EVICT_UPD: begin
        pt_upd_en     = dbit;
        pt_upd_op     = UPD_INVAL;
        pt_upd_way    = own_vic_way;
        da_wr_meta_en = 1'b1;
        da_wr_idx     = own_vic_fp;
        if (da_rd_rc > RC_BITS'(1)) begin
          da_wr_state   = da_rd_state;
          da_wr_dirty   = da_rd_dirty;
          da_wr_rc      = da_rd_rc - 1'b1;
          da_wr_sharers = da_rd_sharers & ~dbit;
        end
        fl_free = (da_rd_rc == RC_BITS'(1)) && link;
      end
      C_BF_REM: begin
        bf_op_valid = 1'b1;
        bf_op       = BF_REMOVE;
        bf_addr     = vic_addr;
      end
      C_LINK: begin
        pt_upd_en  = dbit;
        pt_upd_op  = UPD_FILL;
        pt_upd_way = own_vic_way;
        pt_upd_fp  = fp_q;
        da_rd_en   = 1'b1;
        da_rd_idx  = fp_q;
      end
      C_ALLOC: begin
        pt_upd_en  = dbit;
        pt_upd_op  = UPD_FILL;
        pt_upd_way = own_vic_way;
        pt_upd_fp  = have_slot ? fp_q : fl_alloc_idx;
      end
      C_BF_INS: begin
        bf_op_valid = 1'b1;
        bf_op       = BF_INSERT;
      end
      C_ACCESS: begin
        da_wr_meta_en = 1'b1;
        da_wr_idx     = fp_q;
        da_wr_state   = acc_state;
        da_wr_dirty   = acc_dirty;
        da_wr_rc      = m_rc;
        da_wr_sharers = acc_sharers;
        da_wr_data_en = filled || (r.op == OP_WRITE);
        da_wr_data    = acc_line;
        da_wr_be      = filled ? '1 : r.be;   // a fill writes the whole line
      end
      default: ;
    endcase
  end

  // ---- sequencing ----------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= C_IDLE;
      r         <= '0;
      serve     <= SRV_HIT;
      link      <= 1'b0;
      fp_q      <= '0;
      have_slot <= 1'b0;
      vic_addr  <= '0;
      vic_data  <= '0;
      mem_done  <= 1'b0;
      mem_buf   <= '0;
      filled    <= 1'b0;
      m_state   <= ST_I;
      m_dirty   <= 1'b0;
      m_rc      <= '0;
      m_sharers <= '0;
      line_q    <= '0;
      coh_t_q   <= COH_INV;
      coh_m_q   <= '0;
      peer_en_q <= '0;
      target_q  <= 16'(HIT_LAT);
      stats     <= '0;
    end else begin
      if (mem_rsp_valid) begin
        mem_done <= 1'b1;
        mem_buf  <= mem_rsp_data;
      end
      if (promote_pulse) stats.promotions <= stats.promotions + 1;
      unique case (st)
        C_IDLE: if (req_valid && req_ready) begin
          r         <= '{dom: req_dom, op: req_op, addr: req_addr, wdata: req_wdata,
                         be: req_be, mode: req_mode};
          link      <= 1'b0;
          have_slot <= 1'b0;
          filled    <= 1'b0;
          mem_done  <= 1'b0;
          peer_en_q <= '0;
          target_q  <= 16'(HIT_LAT);
          st        <= C_LOOKUP;
        end
        C_LOOKUP: begin
          if (own_hit) begin
            serve <= SRV_HIT;
            fp_q  <= own_fp;
            st    <= C_DATA_RD;
          end else begin
            target_q <= 16'(T_MISS);
            st       <= C_BF_Q;
          end
        end
        C_BF_Q: if (!bf_busy) st <= C_BF_QW;
        C_BF_QW: if (bf_done) begin
          if (bf_maybe) begin
            peer_en_q <= ~dbit;
            st        <= C_PEER;
          end else begin
            stats.bf_skips <= stats.bf_skips + 1;
            serve <= SRV_MISS;
            st    <= C_MEMREQ;
          end
        end
        C_PEER: begin
          if (peer_hit) begin
            serve <= SRV_FIND;
            link  <= 1'b1;
            fp_q  <= peer_fp;
            st    <= C_EVICT;
          end else begin
            serve <= SRV_MISS;
            st    <= C_MEMREQ;
          end
        end
        C_MEMREQ: if (mem_rd_ready) st <= C_EVICT;
        C_EVICT: begin
          vic_addr <= LADDR_BITS'({own_vic_tag, SET_BITS'(r.addr)});
          st <= own_vic_valid ? C_EVICT_UPD : (link ? C_LINK : C_ALLOC);
        end
        C_EVICT_UPD: begin
          stats.tag_evicts <= stats.tag_evicts + 1;
          vic_data  <= da_rd_data;
          if (da_rd_rc == RC_BITS'(1)) begin
            stats.slot_frees <= stats.slot_frees + 1;
            if (!link) begin
              have_slot <= 1'b1;
              fp_q      <= own_vic_fp;
            end
            st <= (da_rd_dirty || da_rd_state == ST_M) ? C_WB : C_BF_REM;
          end else begin
            st <= link ? C_LINK : C_ALLOC;
          end
        end
        C_WB: if (mem_wb_ready) begin
          stats.writebacks <= stats.writebacks + 1;
          st <= C_BF_REM;
        end
        C_BF_REM:  if (!bf_busy) st <= C_BF_REMW;
        C_BF_REMW: if (bf_done) st <= link ? C_LINK : C_ALLOC;
        C_LINK:    st <= C_DATA_RD;
        C_ALLOC: begin
          if (!have_slot) fp_q <= fl_alloc_idx;
          st <= C_FILL_WAIT;
        end
        C_FILL_WAIT: if (mem_done) begin
          m_state   <= ST_I;
          m_dirty   <= 1'b0;
          m_rc      <= RC_BITS'(1);
          m_sharers <= '0;
          line_q    <= mem_buf;
          filled    <= 1'b1;
          st        <= C_BF_INS;
        end
        C_BF_INS:  if (!bf_busy) st <= C_BF_INSW;
        C_BF_INSW: if (bf_done) st <= C_ACCESS;
        C_DATA_RD: begin
          m_state   <= da_rd_state;
          m_dirty   <= da_rd_dirty;
          m_rc      <= link ? da_rd_rc + 1'b1 : da_rd_rc;
          m_sharers <= da_rd_sharers;
          line_q    <= da_rd_data;
          st        <= C_ACCESS;
        end
        C_ACCESS: begin
          line_q  <= acc_line;
          coh_t_q <= acc_coh;
          coh_m_q <= others;
          if (acc_downgrade) stats.downgrades <= stats.downgrades + 1;
          if (acc_upgrade)   stats.upgrades   <= stats.upgrades + 1;
          if (r.op == OP_WRITE && acc_wt) stats.wt_stores <= stats.wt_stores + 1;
          st <= acc_need_coh ? C_COH : C_RESP;
        end
        C_COH: if (coh_ready) st <= (coh_t_q == COH_INV_POST) ? C_RESP : C_COH_ACK;
        C_COH_ACK: if (coh_ack) st <= C_RESP;
        C_RESP: if (lm_release) begin
          unique case (serve)
            SRV_HIT:  stats.hits   <= stats.hits + 1;
            SRV_FIND: stats.finds  <= stats.finds + 1;
            default:  stats.misses <= stats.misses + 1;
          endcase
          st <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // ---- rules the design relies on -----------------------------------------
  // at most one data entry per line across all partitions
  assert property (@(posedge clk) disable iff (!rst_n) (st == C_PEER) |-> !peer_conflict);
  // the sizing rule: an allocation always finds a free slot
  assert property (@(posedge clk) disable iff (!rst_n) fl_alloc |-> !fl_empty);
  // a linked tag never pushes the refcount past D
  assert property (@(posedge clk) disable iff (!rst_n) (st == C_DATA_RD && link) |-> (da_rd_rc < RC_BITS'(D)));
  // a tag points only at a live entry
  assert property (@(posedge clk) disable iff (!rst_n) (st == C_EVICT_UPD) |-> (da_rd_rc != '0));
  // a request is held stable while it waits
  assert property (@(posedge clk) disable iff (!rst_n) (req_valid && !req_ready) |=> req_valid);
endmodule
