// tb_scp_bloom_filter: self-checking test of the counting Bloom filter.
// A reference copy of the counters (same multiplicative hashes, 4-bit
// saturating counters that stick at 15) is updated with every insert and
// remove; every query must match it. Also checked: no false negatives for
// cached lines, 2K-cycle operation latency, the reset sweep, saturation,
// and that a disabled filter always answers "maybe".
module tb_scp_bloom_filter;
  localparam int M = 256, K = 3, AB = 20, MB = 8;
  logic clk = 0, rst_n = 0, enable = 1, op_valid = 0;
  logic [1:0] op = '0;
  logic [AB-1:0] op_addr = '0;
  logic busy, done, maybe, sat_event;
  scp_bloom_filter #(.M(M), .K(K), .ADDR_BITS(AB)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [63:0] C [3] = '{64'h9E3779B97F4A7C15, 64'hC2B2AE3D27D4EB4F, 64'h165667B19E3779F9};
  int ref_cnt [M];
  int sat_seen = 0;
  always @(posedge clk) if (sat_event) sat_seen++;

  function automatic int h(logic [AB-1:0] a, int k);
    logic [63:0] p = 64'(a) * C[k];
    return int'(p[63:64-MB]);
  endfunction
  function automatic bit ref_maybe(logic [AB-1:0] a);
    for (int k = 0; k < K; k++) if (ref_cnt[h(a, k)] == 0) return 0;
    return 1;
  endfunction

  task automatic do_op(int o, logic [AB-1:0] a, output bit m);
    int lat;
    @(negedge clk);
    while (busy) @(negedge clk);
    op_valid = 1; op = 2'(o); op_addr = a;
    @(negedge clk);
    op_valid = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    check(lat == 2 * K + 1, $sformatf("op latency %0d", lat));
    m = maybe;
    if (o == 1) for (int k = 0; k < K; k++) begin
      // a counter hit twice by one address moves only once
      bit dup = 0;
      for (int j = 0; j < k; j++) if (h(a, j) == h(a, k)) dup = 1;
      if (!dup && ref_cnt[h(a, k)] != 15) ref_cnt[h(a, k)]++;
    end
    if (o == 2) for (int k = 0; k < K; k++) begin
      bit dup = 0;
      for (int j = 0; j < k; j++) if (h(a, j) == h(a, k)) dup = 1;
      if (!dup && ref_cnt[h(a, k)] != 15 && ref_cnt[h(a, k)] != 0) ref_cnt[h(a, k)]--;
    end
  endtask

  logic [AB-1:0] cached[$];
  initial begin
    bit m;
    int initc, idx;
    logic [AB-1:0] a;
    for (int i = 0; i < M; i++) ref_cnt[i] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    initc = 0;
    @(negedge clk);
    while (busy) begin @(negedge clk); initc++; end
    check(initc == M / 16, $sformatf("reset sweep %0d cycles", initc));
    // empty filter: everything negative
    for (int i = 0; i < 20; i++) begin
      do_op(0, AB'($urandom), m);
      check(m == 0, "empty filter query");
    end
    for (int it = 0; it < 300; it++) begin
      if (cached.size() < 40 && ($urandom_range(0, 2) != 0 || cached.size() == 0)) begin
        a = AB'($urandom);
        do_op(1, a, m);
        cached.push_back(a);
      end else begin
        idx = $urandom_range(0, cached.size() - 1);
        a = cached[idx];
        cached.delete(idx);
        do_op(2, a, m);
      end
      a = ($urandom_range(0, 1) && cached.size() > 0) ? cached[$urandom_range(0, cached.size() - 1)] : AB'($urandom);
      do_op(0, a, m);
      check(m == ref_maybe(a), $sformatf("query %h", a));
      foreach (cached[i]) if (i < 3) begin
        do_op(0, cached[i], m);
        check(m == 1, "no false negative");
      end
    end
    // drain: the filter returns to empty
    while (cached.size() > 0) begin
      a = cached.pop_front();
      do_op(2, a, m);
    end
    do_op(0, a, m);
    check(m == ref_maybe(a), "drained query");
    // saturation: 16 inserts of one line stick its counters at 15
    a = AB'(20'h12345);
    for (int i = 0; i < 16; i++) do_op(1, a, m);
    check(sat_seen > 0, "saturation event");
    for (int i = 0; i < 16; i++) do_op(2, a, m);
    do_op(0, a, m);
    check(m == 1, "saturated counters no longer decrement");
    // disabled filter
    enable = 0;
    do_op(0, AB'(20'h00777), m);
    check(m == 1, "disabled filter answers maybe");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
