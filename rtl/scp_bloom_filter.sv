// scp_bloom_filter: counting Bloom filter at the PeerProbe front end.
//
// Before the controller reads the tag sets of the D-1 peer partitions, it
// asks this filter whether the line can be cached at all. The filter holds
// M 4-bit saturating counters. A line address selects K counters through K
// hash functions. A counter is incremented when a line is inserted into the
// data array and decremented when its data slot is freed (refcount reaches
// zero), so the filter tracks cache occupancy exactly: no false negatives,
// false positives at about (1 - e^(-K*n/M))^K for n cached lines. A
// negative answer lets the controller skip the peer tag scan; the response
// is still padded to T_miss, so this saves tag-read energy and never time.
// A counter that reaches 15 stays at 15 and is no longer decremented
// (`sat_event` reports that moment).
//
// Hash k is multiplicative (Fibonacci) hashing: the line address times a
// 64-bit odd constant C_k, keeping the top log2(M) bits of the low 64 bits
// of the product. The paper fixes M, K and the counter width, not the hash;
// the hash, the 16-counter row layout and the sequential schedule are this
// design's choices.
//
// Interface and timing: one operation at a time (`op_valid` while `!busy`):
// QUERY, INSERT or REMOVE. The K counters are visited one after another,
// two cycles each (read the row, write it back), so `done` pulses 2K+1
// cycles after the cycle that accepted the operation, with `maybe` valid
// for a query. After reset the counter
// rows are cleared one per cycle (M/16 cycles) before `busy` falls.
// `enable` low makes every query answer "maybe" (filter switched off).
module scp_bloom_filter #(
  parameter int unsigned M          = scp_pkg::DEF_BF_M,
  parameter int unsigned K          = scp_pkg::DEF_BF_K,
  parameter int unsigned ADDR_BITS  = scp_pkg::DEF_LADDR_BITS,
  localparam int unsigned MB        = $clog2(M),
  localparam int unsigned CPR       = 16,             // counters per row
  localparam int unsigned ROWS      = M / CPR,
  localparam int unsigned ROW_BITS  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 enable,
  input  logic                 op_valid,
  input  logic [1:0]           op,        // 0 QUERY, 1 INSERT, 2 REMOVE
  input  logic [ADDR_BITS-1:0] op_addr,
  output logic                 busy,
  output logic                 done,
  output logic                 maybe,
  output logic                 sat_event
);
  localparam logic [1:0] BF_QUERY  = 2'd0;
  localparam logic [1:0] BF_INSERT = 2'd1;
  localparam logic [1:0] BF_REMOVE = 2'd2;

  typedef enum logic [1:0] {B_INIT, B_IDLE, B_READ, B_MOD} bstate_e;

  localparam logic [63:0] HASH_C [4] = '{64'h9E37_79B9_7F4A_7C15, 64'hC2B2_AE3D_27D4_EB4F,
                                         64'h1656_67B1_9E37_79F9, 64'hD6E8_FEB8_6659_FD93};

  logic [4*CPR-1:0] mem [ROWS];
  logic [4*CPR-1:0] row_q;

  bstate_e               st;
  logic [1:0]            op_q;
  logic [ADDR_BITS-1:0]  addr_q;
  logic [1:0]            k_q;
  logic                  all_nz;
  logic [ROW_BITS:0]     init_idx;

  function automatic logic [MB-1:0] hash(logic [ADDR_BITS-1:0] a, logic [1:0] k);
    logic [63:0] prod;
    prod = 64'(a) * HASH_C[k];
    return MB'(prod >> (64 - MB));
  endfunction

  logic [MB-1:0]   h;
  logic [ROW_BITS-1:0] h_row;
  logic [3:0]      h_col;
  logic [3:0]      cnt, cnt_new;
  assign h     = hash(addr_q, k_q);
  assign h_row = ROW_BITS'(h >> 4);
  assign h_col = 4'(h);
  assign cnt   = row_q[h_col*4 +: 4];

  always_comb begin
    cnt_new = cnt;
    if (op_q == BF_INSERT && cnt != 4'hF)                  cnt_new = cnt + 1'b1;
    else if (op_q == BF_REMOVE && cnt != 4'hF && cnt != 0) cnt_new = cnt - 1'b1;
  end

  assign busy = (st != B_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= B_INIT;
      init_idx  <= '0;
      op_q      <= BF_QUERY;
      addr_q    <= '0;
      k_q       <= '0;
      all_nz    <= 1'b1;
      done      <= 1'b0;
      maybe     <= 1'b0;
      sat_event <= 1'b0;
    end else begin
      done      <= 1'b0;
      sat_event <= 1'b0;
      unique case (st)
        B_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == (ROW_BITS+1)'(ROWS - 1)) st <= B_IDLE;
        end
        B_IDLE: if (op_valid) begin
          op_q   <= op;
          addr_q <= op_addr;
          k_q    <= '0;
          all_nz <= 1'b1;
          st     <= B_READ;
        end
        B_READ: st <= B_MOD;
        B_MOD: begin
          if (cnt == 4'h0) all_nz <= 1'b0;
          if (op_q == BF_INSERT && cnt == 4'hE) sat_event <= 1'b1;
          if (k_q == 2'(K - 1)) begin
            st    <= B_IDLE;
            done  <= 1'b1;
            maybe <= !enable || (all_nz && cnt != 4'h0);
          end else begin
            k_q <= k_q + 1'b1;
            st  <= B_READ;
          end
        end
        default: st <= B_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == B_READ) row_q <= mem[h_row];
  end

  always_ff @(posedge clk) begin
    if (rst_n && st == B_INIT) begin
      mem[init_idx[ROW_BITS-1:0]] <= '0;
    end else if (st == B_MOD && op_q != BF_QUERY) begin
      mem[h_row][h_col*4 +: 4] <= cnt_new;
    end
  end

  initial begin
    assert (K >= 1 && K <= 4) else $error("K must be 1..4");
    assert (M >= 32 && (1 << MB) == M) else $error("M must be a power of two >= 32");
  end
endmodule
