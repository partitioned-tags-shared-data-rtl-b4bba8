// tb_scp_peer_find: self-checking test of the cross-partition match.
// Random partition results are applied; own-partition fields must follow the
// requesting domain, and the peer result must be the lowest enabled other
// domain that hits, with a conflict flag only when two peers disagree on
// the forward pointer.
module tb_scp_peer_find;
  localparam int D = 4, WAY_BITS = 2, TAG_BITS = 5, FP_BITS = 6, DOM_BITS = 2;
  logic [DOM_BITS-1:0] req_dom;
  logic [D-1:0] peer_en, pt_hit, pt_vic_valid;
  logic [FP_BITS-1:0] pt_fp [D], pt_vic_fp [D];
  logic [WAY_BITS-1:0] pt_way [D], pt_vic_way [D];
  logic [TAG_BITS-1:0] pt_vic_tag [D];
  logic own_hit, own_vic_valid, peer_hit, peer_conflict;
  logic [WAY_BITS-1:0] own_way, own_vic_way;
  logic [FP_BITS-1:0] own_fp, own_vic_fp, peer_fp;
  logic [TAG_BITS-1:0] own_vic_tag;
  logic [DOM_BITS-1:0] peer_dom;

  scp_peer_find #(.D(D), .WAY_BITS(WAY_BITS), .TAG_BITS(TAG_BITS), .FP_BITS(FP_BITS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e_dom, e_hit, e_conf, e_fp;
    for (int it = 0; it < 500; it++) begin
      req_dom = DOM_BITS'($urandom);
      peer_en = D'($urandom);
      pt_hit  = D'($urandom);
      pt_vic_valid = D'($urandom);
      for (int i = 0; i < D; i++) begin
        // mostly consistent pointers, sometimes not
        pt_fp[i]      = ($urandom_range(0, 5) == 0) ? FP_BITS'($urandom) : FP_BITS'(17);
        pt_way[i]     = WAY_BITS'($urandom);
        pt_vic_way[i] = WAY_BITS'($urandom);
        pt_vic_tag[i] = TAG_BITS'($urandom);
        pt_vic_fp[i]  = FP_BITS'($urandom);
      end
      #1;
      e_hit = 0; e_conf = 0; e_dom = 0; e_fp = 0;
      for (int i = 0; i < D; i++) begin
        if (i != req_dom && peer_en[i] && pt_hit[i]) begin
          if (!e_hit) begin e_hit = 1; e_dom = i; e_fp = pt_fp[i]; end
          else if (pt_fp[i] != e_fp) e_conf = 1;
        end
      end
      check(own_hit == pt_hit[req_dom] && own_fp == pt_fp[req_dom] && own_way == pt_way[req_dom], "own");
      check(own_vic_way == pt_vic_way[req_dom] && own_vic_valid == pt_vic_valid[req_dom] &&
            own_vic_tag == pt_vic_tag[req_dom] && own_vic_fp == pt_vic_fp[req_dom], "own victim");
      check(peer_hit == e_hit[0], "peer hit");
      if (e_hit) check(peer_dom == e_dom[DOM_BITS-1:0] && peer_fp == e_fp[FP_BITS-1:0], "peer dom/fp");
      check(peer_conflict == e_conf[0], "conflict");
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
