// tb_scp_latency_mask: self-checking test of the constant-time release.
// For several targets and data-ready times, the release must come exactly
// at max(target, ready time) cycles after start, and `overrun` must be seen
// only when the data came later than the target.
module tb_scp_latency_mask;
  logic clk = 0, rst_n = 0, start = 0, data_ready = 0, release_ok, overrun;
  logic [15:0] target = '0, elapsed;
  scp_latency_mask #(.CNT_BITS(16)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tgt, rdy, cyc, exp_cyc;
    bit saw_over;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 60; it++) begin
      tgt = (it % 3 == 0) ? 20 : (it % 3 == 1) ? 200 : $urandom_range(1, 100);
      rdy = $urandom_range(1, 260);
      @(negedge clk);
      start = 1; target = 16'(tgt); data_ready = 0;
      @(negedge clk);
      start = 0;
      cyc = 1; saw_over = 0;
      while (1) begin
        data_ready = (cyc >= rdy);
        #1;
        if (overrun) saw_over = 1;
        if (release_ok) break;
        @(negedge clk);
        cyc++;
      end
      exp_cyc = (rdy > tgt) ? rdy : tgt;
      check(cyc == exp_cyc, $sformatf("target %0d ready %0d: released at %0d", tgt, rdy, cyc));
      check(saw_over == (rdy > tgt), $sformatf("overrun flag target %0d ready %0d", tgt, rdy));
      data_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
