// tb_scp_bloom_sweep: the Bloom-filter size sweep, scaled down. Seven
// counting Bloom filters with K = 3 and m = 64 .. 4096 counters (m/n from
// 1/4 to 16, the span of the published sweep) receive the same n = 256
// random lines; 1000 queries for lines never inserted then measure the
// false-positive rate, i.e. the share of misses whose peer scan the filter
// cannot skip. Each rate must lie within 0.06 of (1 - e^(-Kn/m))^K, the
// rates must fall as m grows, and no inserted line may be reported absent.
// Removing half of the lines must bring the rate down to the formula for
// n/2 wherever m/n >= 2 (below that, counters saturate and stay set).
module tb_scp_bloom_sweep;
  localparam int NI = 7, K = 3, NL = 256, NQ = 1000, AB = 34;
  localparam int MS [NI] = '{64, 128, 256, 512, 1024, 2048, 4096};

  logic clk = 0, rst_n = 0, op_valid = 0;
  logic [1:0] op = '0;
  logic [AB-1:0] op_addr = '0;
  logic [NI-1:0] busy, done, maybe, sat;

  for (genvar g = 0; g < NI; g++) begin : g_bf
    scp_bloom_filter #(.M(MS[g]), .K(K), .ADDR_BITS(AB)) u_bf (
      .clk, .rst_n, .enable(1'b1), .op_valid, .op, .op_addr,
      .busy(busy[g]), .done(done[g]), .maybe(maybe[g]), .sat_event(sat[g]));
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one operation on all filters at once; returns their answers
  logic [NI-1:0] ans;
  task automatic bf_op(int o, logic [AB-1:0] a);
    @(negedge clk);
    while (|busy) @(negedge clk);
    op_valid = 1; op = 2'(o); op_addr = a;
    @(negedge clk);
    op_valid = 0;
    while (!(&done)) @(negedge clk);
    ans = maybe;
  endtask

  logic [AB-1:0] lines [NL];
  logic [AB-1:0] qa;
  int fp [NI];
  real rate [NI], prev, expect_r;

  task automatic measure(int n_in);
    for (int i = 0; i < NI; i++) fp[i] = 0;
    for (int q = 0; q < NQ; q++) begin
      qa = {2'b11, 32'($urandom)};   // never inserted: inserted lines have top bits 00
      bf_op(0, qa);
      for (int i = 0; i < NI; i++) if (ans[i]) fp[i]++;
    end
    for (int i = 0; i < NI; i++) rate[i] = real'(fp[i]) / NQ;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    while (|busy) @(negedge clk);
    for (int i = 0; i < NL; i++) begin
      lines[i] = {2'b00, 32'($urandom)};
      bf_op(1, lines[i]);
    end
    for (int i = 0; i < NL; i++) begin
      bf_op(0, lines[i]);
      check(&ans, $sformatf("inserted line %0d reported absent", i));
    end
    measure(NL);
    prev = 2.0;
    for (int i = 0; i < NI; i++) begin
      expect_r = (1.0 - $exp(-real'(K) * NL / MS[i])) ** K;
      $display("m=%0d m/n=%0.2f: false-positive rate %0.3f (formula %0.3f), skip rate %0.3f",
               MS[i], real'(MS[i]) / NL, rate[i], expect_r, 1.0 - rate[i]);
      check(rate[i] - expect_r < 0.06 && expect_r - rate[i] < 0.06,
            $sformatf("m=%0d rate %0.3f vs %0.3f", MS[i], rate[i], expect_r));
      check(rate[i] <= prev, $sformatf("m=%0d rate not falling", MS[i]));
      prev = rate[i];
    end
    // remove half of the lines
    for (int i = 0; i < NL / 2; i++) bf_op(2, lines[i]);
    for (int i = NL / 2; i < NL; i++) begin
      bf_op(0, lines[i]);
      check(&ans, "remaining line reported absent");
    end
    measure(NL / 2);
    for (int i = 0; i < NI; i++) if (MS[i] >= 2 * NL) begin
      expect_r = (1.0 - $exp(-real'(K) * (NL / 2) / MS[i])) ** K;
      $display("after removing half, m=%0d: rate %0.3f (formula %0.3f)", MS[i], rate[i], expect_r);
      check(rate[i] - expect_r < 0.06 && expect_r - rate[i] < 0.06,
            $sformatf("after removal m=%0d rate %0.3f vs %0.3f", MS[i], rate[i], expect_r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
