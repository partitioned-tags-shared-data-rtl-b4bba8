// scp_free_list: allocator of free data-array slots.
//
// A slot is free exactly when its reference count is zero. Slots freed by a
// tag eviction are pushed at the tail of a circular FIFO and handed out again
// from its head, so both operations take constant time. After reset no slot
// has ever been used; instead of filling the FIFO with all N indices, a
// counter hands out never-used slots 0, 1, ... once the FIFO is empty. The
// sizing rule (N = number of tags) means an allocation can never find the
// list empty while the invariants hold; `empty` is exported for checking.
//
// Interface and timing: `alloc_idx` is the slot the next `alloc` takes
// (valid while `!empty`); `alloc` and `free` act on the clock edge and may
// come in the same cycle. A slot freed in a cycle is allocatable from the
// next cycle. The paper names a tail-pointer free list; the never-used
// counter is this design's way to avoid an N-cycle initialisation.
module scp_free_list #(
  parameter int unsigned N = scp_pkg::DEF_D * scp_pkg::DEF_WD * scp_pkg::DEF_SETS,
  localparam int unsigned IDX_BITS = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                alloc,
  output logic [IDX_BITS-1:0] alloc_idx,
  output logic                empty,
  input  logic                free,
  input  logic [IDX_BITS-1:0] free_idx,
  output logic [IDX_BITS:0]   n_free
);
  logic [IDX_BITS-1:0] fifo [N];
  logic [IDX_BITS-1:0] head, tail;
  logic [IDX_BITS:0]   count;       // entries in the FIFO
  logic [IDX_BITS:0]   fresh;       // next never-used slot

  logic from_fifo;
  assign from_fifo = (count != '0);
  assign alloc_idx = from_fifo ? fifo[head] : fresh[IDX_BITS-1:0];
  assign empty     = !from_fifo && (fresh == (IDX_BITS+1)'(N));
  assign n_free    = count + ((IDX_BITS+1)'(N) - fresh);

  function automatic logic [IDX_BITS-1:0] inc(logic [IDX_BITS-1:0] p);
    return (p == IDX_BITS'(N - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
      fresh <= '0;
    end else begin
      if (free) tail <= inc(tail);
      if (alloc && from_fifo) head <= inc(head);
      if (alloc && !from_fifo && !empty) fresh <= fresh + 1'b1;
      unique case ({free, alloc && from_fifo})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (free) fifo[tail] <= free_idx;
  end

  // A slot is freed only after it was handed out, so the FIFO never holds
  // more than N entries, and nobody allocates from an empty list.
  assert property (@(posedge clk) disable iff (!rst_n) alloc |-> !empty);
  assert property (@(posedge clk) disable iff (!rst_n) free |-> (count < (IDX_BITS+1)'(N)));
endmodule
