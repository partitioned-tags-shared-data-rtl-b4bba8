// scp_peer_find: combines the parallel lookups of the D tag partitions.
//
// Every partition compares the addressed set against the request address at
// once. This block splits the D results by the requesting domain d:
//  * Lookup uses partition d only: `own_hit`/`own_fp`, and the victim that
//    partition d would replace (`own_vic_*`).
//  * PeerProbe uses the other D-1 partitions: `peer_hit` if any of them holds
//    the line, `peer_fp` its forward pointer and `peer_dom` the lowest such
//    domain. Several peers may hold the line, but then they all point at the
//    same data entry (one data entry per line); `peer_conflict` flags the
//    impossible case of two peers pointing at different entries.
// `peer_en` masks partitions whose tags were not read (a negative Bloom
// filter skips the scan); their hit outputs are ignored. Purely
// combinational. The tie-break (lowest domain) is this design's choice; the
// paper says "pick e in E, at most one if invariants hold".
module scp_peer_find #(
  parameter int unsigned D        = scp_pkg::DEF_D,
  parameter int unsigned WAY_BITS = $clog2(scp_pkg::DEF_WD),
  parameter int unsigned TAG_BITS = scp_pkg::DEF_LADDR_BITS - $clog2(scp_pkg::DEF_SETS),
  parameter int unsigned FP_BITS  = $clog2(scp_pkg::DEF_D * scp_pkg::DEF_WD * scp_pkg::DEF_SETS),
  localparam int unsigned DOM_BITS = (D > 1) ? $clog2(D) : 1
) (
  input  logic [DOM_BITS-1:0] req_dom,
  input  logic [D-1:0]        peer_en,
  input  logic [D-1:0]        pt_hit,
  input  logic [FP_BITS-1:0]  pt_fp      [D],
  input  logic [WAY_BITS-1:0] pt_way     [D],
  input  logic [WAY_BITS-1:0] pt_vic_way [D],
  input  logic [D-1:0]        pt_vic_valid,
  input  logic [TAG_BITS-1:0] pt_vic_tag [D],
  input  logic [FP_BITS-1:0]  pt_vic_fp  [D],
  output logic                own_hit,
  output logic [WAY_BITS-1:0] own_way,
  output logic [FP_BITS-1:0]  own_fp,
  output logic [WAY_BITS-1:0] own_vic_way,
  output logic                own_vic_valid,
  output logic [TAG_BITS-1:0] own_vic_tag,
  output logic [FP_BITS-1:0]  own_vic_fp,
  output logic                peer_hit,
  output logic [FP_BITS-1:0]  peer_fp,
  output logic [DOM_BITS-1:0] peer_dom,
  output logic                peer_conflict
);
  always_comb begin
    own_hit       = pt_hit[req_dom];
    own_way       = pt_way[req_dom];
    own_fp        = pt_fp[req_dom];
    own_vic_way   = pt_vic_way[req_dom];
    own_vic_valid = pt_vic_valid[req_dom];
    own_vic_tag   = pt_vic_tag[req_dom];
    own_vic_fp    = pt_vic_fp[req_dom];
  end

  always_comb begin
    peer_hit      = 1'b0;
    peer_fp       = '0;
    peer_dom      = '0;
    peer_conflict = 1'b0;
    for (int i = 0; i < D; i++) begin
      if (DOM_BITS'(i) != req_dom && peer_en[i] && pt_hit[i]) begin
        if (!peer_hit) begin
          peer_hit = 1'b1;
          peer_fp  = pt_fp[i];
          peer_dom = DOM_BITS'(i);
        end else if (pt_fp[i] != peer_fp) begin
          peer_conflict = 1'b1;
        end
      end
    end
  end
endmodule
