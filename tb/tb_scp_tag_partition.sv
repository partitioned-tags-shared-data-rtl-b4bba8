// tb_scp_tag_partition: self-checking test of one domain's tag partition.
// A reference model (valid/tag/fp and LRU order per set, kept as ages) runs
// beside the block; random lookups, fills at the reported victim, touches
// and invalidations are compared every step: hit, way, forward pointer, and
// the victim (first invalid way, else least recently used).
module tb_scp_tag_partition;
  localparam int WD = 4, SETS = 8, TAG_BITS = 6, FP_BITS = 7;
  localparam int SET_BITS = 3, WAY_BITS = 2;

  logic clk = 0, rst_n = 0, ready;
  logic lk_en = 0, upd_en = 0;
  logic [SET_BITS-1:0] lk_set = '0, upd_set = '0;
  logic [TAG_BITS-1:0] lk_tag = '0, upd_tag = '0, vic_tag;
  logic lk_hit, vic_valid;
  logic [WAY_BITS-1:0] lk_way, vic_way, upd_way = '0;
  logic [FP_BITS-1:0] lk_fp, vic_fp, upd_fp = '0;
  logic [1:0] upd_op = '0;

  scp_tag_partition #(.WD(WD), .SETS(SETS), .TAG_BITS(TAG_BITS), .FP_BITS(FP_BITS)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit              rv  [SETS][WD];
  int              rtag[SETS][WD];
  int              rfp [SETS][WD];
  int              rage[SETS][WD];

  function automatic int ref_victim(int s);
    for (int w = 0; w < WD; w++) if (!rv[s][w]) return w;
    for (int w = 0; w < WD; w++) if (rage[s][w] == WD - 1) return w;
    return -1;
  endfunction
  function automatic void ref_touch(int s, int w);
    int a = rage[s][w];
    for (int i = 0; i < WD; i++) if (rage[s][i] < a) rage[s][i]++;
    rage[s][w] = 0;
  endfunction

  initial begin
    int s, t, hw, v, ready_cycles;
    for (int i = 0; i < SETS; i++) for (int w = 0; w < WD; w++) begin
      rv[i][w] = 0; rage[i][w] = w; rtag[i][w] = 0; rfp[i][w] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    ready_cycles = 0;
    do begin @(posedge clk); ready_cycles++; end while (!ready);
    check(ready_cycles == SETS + 1, $sformatf("init sweep took %0d cycles", ready_cycles));
    for (int it = 0; it < 600; it++) begin
      s = $urandom_range(0, SETS - 1);
      t = $urandom_range(0, 11);
      @(negedge clk);
      lk_en = 1; lk_set = s[SET_BITS-1:0]; lk_tag = t[TAG_BITS-1:0];
      @(negedge clk);
      lk_en = 0;
      hw = -1;
      for (int w = 0; w < WD; w++) if (rv[s][w] && rtag[s][w] == t) hw = w;
      v = ref_victim(s);
      check(lk_hit == (hw >= 0), $sformatf("hit set %0d tag %0d", s, t));
      if (hw >= 0) begin
        check(lk_way == hw[WAY_BITS-1:0] && lk_fp == rfp[s][hw][FP_BITS-1:0], "hit way/fp");
      end
      check(vic_way == v[WAY_BITS-1:0], $sformatf("victim set %0d exp %0d got %0d", s, v, vic_way));
      check(vic_valid == rv[s][v], "victim valid");
      if (rv[s][v]) check(vic_tag == rtag[s][v][TAG_BITS-1:0] && vic_fp == rfp[s][v][FP_BITS-1:0], "victim tag/fp");
      upd_en = 1; upd_set = s[SET_BITS-1:0];
      if (hw >= 0 && $urandom_range(0, 4) == 0) begin
        upd_op = 2'd2; upd_way = hw[WAY_BITS-1:0];
        rv[s][hw] = 0;
      end else if (hw >= 0) begin
        upd_op = 2'd0; upd_way = hw[WAY_BITS-1:0];
        ref_touch(s, hw);
      end else begin
        upd_op = 2'd1; upd_way = v[WAY_BITS-1:0]; upd_tag = t[TAG_BITS-1:0];
        upd_fp = FP_BITS'($urandom);
        rv[s][v] = 1; rtag[s][v] = t; rfp[s][v] = int'(upd_fp);
        ref_touch(s, v);
      end
      @(negedge clk);
      upd_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
