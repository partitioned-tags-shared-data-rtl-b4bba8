// scp_tag_partition: the tag array of one security domain.
//
// Each domain owns W_d tag ways in every set. A tag entry holds the line
// address (here the bits above the set index), a valid bit, a forward
// pointer into the shared data array, and per-domain LRU state. The entry
// holds no coherence state and no data; those live in the data entry the
// forward pointer names. Only the owning domain's accesses change this
// array (tag isolation), so the LRU and the victim choice depend on this
// domain's own traffic only.
//
// Interface and timing:
//  * After reset the array sweeps one set per cycle to clear the valid bits
//    and seed the LRU ages; `ready` rises when the sweep is done (SETS
//    cycles).
//  * Lookup: `lk_en` with `lk_set`/`lk_tag` reads the set into a register;
//    one cycle later `lk_hit`, `lk_way`, `lk_fp` give the match and
//    `vic_*` the victim this domain would replace (first invalid way, else
//    the least recently used way).
//  * Update: `upd_en` applies `upd_op` to way `upd_way` of the set read by
//    the last lookup: TOUCH makes the way most recently used, FILL writes a
//    valid tag with forward pointer and makes it MRU, INVAL clears it.
//    The update writes back the whole set and refreshes the read register,
//    so consecutive updates of one set compose.
// LRU is kept as a per-way age (0 = MRU, W_d-1 = LRU), the ages of a set
// forming a permutation. The paper asks for per-domain LRU; the age encoding
// is this design's choice.
module scp_tag_partition #(
  parameter int unsigned WD       = scp_pkg::DEF_WD,
  parameter int unsigned SETS     = scp_pkg::DEF_SETS,
  parameter int unsigned TAG_BITS = scp_pkg::DEF_LADDR_BITS - $clog2(scp_pkg::DEF_SETS),
  parameter int unsigned FP_BITS  = $clog2(scp_pkg::DEF_D * scp_pkg::DEF_WD * scp_pkg::DEF_SETS),
  localparam int unsigned SET_BITS = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_BITS = (WD > 1) ? $clog2(WD) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  output logic                ready,
  // lookup
  input  logic                lk_en,
  input  logic [SET_BITS-1:0] lk_set,
  input  logic [TAG_BITS-1:0] lk_tag,
  output logic                lk_hit,
  output logic [WAY_BITS-1:0] lk_way,
  output logic [FP_BITS-1:0]  lk_fp,
  output logic [WAY_BITS-1:0] vic_way,
  output logic                vic_valid,
  output logic [TAG_BITS-1:0] vic_tag,
  output logic [FP_BITS-1:0]  vic_fp,
  // update
  input  logic                upd_en,
  input  logic [1:0]          upd_op,     // 0 TOUCH, 1 FILL, 2 INVAL
  input  logic [SET_BITS-1:0] upd_set,
  input  logic [WAY_BITS-1:0] upd_way,
  input  logic [TAG_BITS-1:0] upd_tag,
  input  logic [FP_BITS-1:0]  upd_fp
);
  localparam logic [1:0] UPD_FILL  = 2'd1;
  localparam logic [1:0] UPD_INVAL = 2'd2;

  typedef struct packed {
    logic                valid;
    logic [TAG_BITS-1:0] tag;
    logic [FP_BITS-1:0]  fp;
    logic [WAY_BITS-1:0] age;
  } tag_entry_t;

  typedef tag_entry_t [WD-1:0] tag_row_t;

  tag_row_t mem [SETS];
  tag_row_t row_q;
  logic [TAG_BITS-1:0] tag_q;

  // reset sweep
  logic [SET_BITS:0] init_idx;
  assign ready = (init_idx == (SET_BITS+1)'(SETS));

  function automatic tag_row_t reset_row();
    tag_row_t r;
    for (int w = 0; w < WD; w++) begin
      r[w]       = '0;
      r[w].age   = WAY_BITS'(w);
    end
    return r;
  endfunction

  // make way w most recently used
  function automatic tag_row_t touch(tag_row_t r, logic [WAY_BITS-1:0] w);
    tag_row_t o = r;
    for (int i = 0; i < WD; i++) begin
      if (r[i].age < r[w].age) o[i].age = r[i].age + 1'b1;
    end
    o[w].age = '0;
    return o;
  endfunction

  tag_row_t next_row;
  always_comb begin
    next_row = row_q;
    unique case (upd_op)
      UPD_FILL: begin
        next_row = touch(row_q, upd_way);
        next_row[upd_way].valid = 1'b1;
        next_row[upd_way].tag   = upd_tag;
        next_row[upd_way].fp    = upd_fp;
      end
      UPD_INVAL: next_row[upd_way].valid = 1'b0;
      default:   next_row = touch(row_q, upd_way);  // TOUCH
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      init_idx <= '0;
    end else if (!ready) begin
      init_idx <= init_idx + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && !ready) begin
      mem[init_idx[SET_BITS-1:0]] <= reset_row();
    end else if (upd_en) begin
      mem[upd_set] <= next_row;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row_q <= reset_row();
      tag_q <= '0;
    end else if (lk_en) begin
      row_q <= mem[lk_set];
      tag_q <= lk_tag;
    end else if (upd_en) begin
      row_q <= next_row;
    end
  end

  // match and victim selection on the registered set
  always_comb begin
    lk_hit    = 1'b0;
    lk_way    = '0;
    lk_fp     = '0;
    for (int w = WD - 1; w >= 0; w--) begin
      if (row_q[w].valid && row_q[w].tag == tag_q) begin
        lk_hit = 1'b1;
        lk_way = WAY_BITS'(w);
        lk_fp  = row_q[w].fp;
      end
    end
  end

  always_comb begin
    vic_way   = '0;
    for (int w = 0; w < WD; w++) begin
      if (row_q[w].age == WAY_BITS'(WD - 1)) vic_way = WAY_BITS'(w);
    end
    for (int w = WD - 1; w >= 0; w--) begin
      if (!row_q[w].valid) begin
        vic_way   = WAY_BITS'(w);
      end
    end
    vic_valid = row_q[vic_way].valid;
    vic_tag   = row_q[vic_way].tag;
    vic_fp    = row_q[vic_way].fp;
  end

endmodule
