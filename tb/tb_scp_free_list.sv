// tb_scp_free_list: self-checking test of the data-slot free list.
// Drains all never-used slots (0..N-1 in order), then frees slots and checks
// they come back first-in first-out, including an alloc and a free in the
// same cycle, and checks the free-slot count against a reference queue.
module tb_scp_free_list;
  localparam int N = 16, IDX = 4;
  logic clk = 0, rst_n = 0, alloc = 0, free = 0, empty;
  logic [IDX-1:0] alloc_idx, free_idx = '0;
  logic [IDX:0] n_free;
  scp_free_list #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int q[$];
  int used[$];
  initial begin
    int x;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    check(n_free == N && !empty, "all free after reset");
    for (int i = 0; i < N; i++) begin
      check(alloc_idx == IDX'(i), $sformatf("fresh slot %0d got %0d", i, alloc_idx));
      used.push_back(alloc_idx);
      alloc = 1; @(negedge clk); alloc = 0;
    end
    check(empty && n_free == 0, "empty after N allocations");
    // free in a shuffled order
    used.shuffle();
    for (int i = 0; i < 10; i++) begin
      x = used.pop_front();
      free = 1; free_idx = IDX'(x); q.push_back(x);
      @(negedge clk); free = 0;
    end
    check(n_free == 10, "ten free");
    for (int it = 0; it < 200; it++) begin
      // allocation must return the oldest freed slot
      check(alloc_idx == IDX'(q[0]), $sformatf("fifo order exp %0d got %0d", q[0], alloc_idx));
      alloc = 1;
      x = q.pop_front();
      if ($urandom_range(0, 1) && used.size() > 0) begin
        free = 1; free_idx = IDX'(used[0]); q.push_back(used.pop_front());
      end
      used.push_back(x);
      @(negedge clk); alloc = 0; free = 0;
      check(n_free == (IDX+1)'(q.size()), "count");
      if (q.size() == 0) begin
        free = 1; free_idx = IDX'(used[0]); q.push_back(used.pop_front());
        @(negedge clk); free = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
