// scp_data_array: the single shared data pool of the SCP cache.
//
// N entries, addressed by a flat slot index (the forward pointer of a tag).
// Each entry holds the line's one and only coherence state (MESI), a dirty
// bit, a reference count of the tags in all partitions that point at it, the
// per-line sharer vector the coherent LLC keeps anyway (one bit per domain
// holding a private copy), and the 64-byte line. No address is stored: the
// address lives only in the tags. N equals the total number of tags, so an
// allocation always finds a free entry and no entry is ever replaced for
// capacity; the array has no replacement logic.
//
// Interface and timing: one read port (`rd_en`, `rd_idx`; metadata and line
// are valid the next cycle) and one write port, with separate enables for
// metadata (`wr_meta_en`) and line (`wr_data_en`, byte enables `wr_be`).
// A read and a write of the same slot in one cycle return the old contents.
// Nothing is cleared at reset: a slot's metadata is written when it is
// allocated and read only while a tag points at it.
module scp_data_array #(
  parameter int unsigned N         = scp_pkg::DEF_D * scp_pkg::DEF_WD * scp_pkg::DEF_SETS,
  parameter int unsigned D         = scp_pkg::DEF_D,
  parameter int unsigned LINE_BITS = scp_pkg::DEF_LINE_BITS,
  localparam int unsigned IDX_BITS = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned RC_BITS  = $clog2(D + 1),
  localparam int unsigned BE_BITS  = LINE_BITS / 8
) (
  input  logic                 clk,
  input  logic                 rd_en,
  input  logic [IDX_BITS-1:0]  rd_idx,
  output scp_pkg::mesi_e       rd_state,
  output logic                 rd_dirty,
  output logic [RC_BITS-1:0]   rd_rc,
  output logic [D-1:0]         rd_sharers,
  output logic [LINE_BITS-1:0] rd_data,
  input  logic                 wr_meta_en,
  input  logic                 wr_data_en,
  input  logic [IDX_BITS-1:0]  wr_idx,
  input  scp_pkg::mesi_e       wr_state,
  input  logic                 wr_dirty,
  input  logic [RC_BITS-1:0]   wr_rc,
  input  logic [D-1:0]         wr_sharers,
  input  logic [LINE_BITS-1:0] wr_data,
  input  logic [BE_BITS-1:0]   wr_be
);
  typedef struct packed {
    scp_pkg::mesi_e     state;
    logic               dirty;
    logic [RC_BITS-1:0] rc;
    logic [D-1:0]       sharers;
  } meta_t;

  meta_t                meta [N];
  logic [LINE_BITS-1:0] line [N];
  meta_t                meta_q;

  always_ff @(posedge clk) begin
    if (rd_en) begin
      meta_q  <= meta[rd_idx];
      rd_data <= line[rd_idx];
    end
  end

  always_ff @(posedge clk) begin
    if (wr_meta_en) meta[wr_idx] <= '{state: wr_state, dirty: wr_dirty, rc: wr_rc, sharers: wr_sharers};
  end

  always_ff @(posedge clk) begin
    if (wr_data_en) begin
      for (int b = 0; b < BE_BITS; b++) begin
        if (wr_be[b]) line[wr_idx][b*8 +: 8] <= wr_data[b*8 +: 8];
      end
    end
  end

  assign rd_state   = meta_q.state;
  assign rd_dirty   = meta_q.dirty;
  assign rd_rc      = meta_q.rc;
  assign rd_sharers = meta_q.sharers;
endmodule
