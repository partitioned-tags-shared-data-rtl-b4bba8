// tb_scp_data_array: self-checking test of the shared data pool.
// Random metadata writes and byte-enabled line writes are mirrored in a
// reference array; random reads (one-cycle latency) are compared.
module tb_scp_data_array;
  localparam int N = 64, D = 4, LINE_BITS = 64, IDX = 6, RC = 3, BE = 8;
  logic clk = 0;
  logic rd_en = 0, wr_meta_en = 0, wr_data_en = 0;
  logic [IDX-1:0] rd_idx = '0, wr_idx = '0;
  scp_pkg::mesi_e rd_state, wr_state = scp_pkg::ST_I;
  logic rd_dirty, wr_dirty = 0;
  logic [RC-1:0] rd_rc, wr_rc = '0;
  logic [D-1:0] rd_sharers, wr_sharers = '0;
  logic [LINE_BITS-1:0] rd_data, wr_data = '0;
  logic [BE-1:0] wr_be = '0;

  scp_data_array #(.N(N), .D(D), .LINE_BITS(LINE_BITS)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [1:0]           m_state [N];
  logic                 m_dirty [N];
  logic [RC-1:0]        m_rc    [N];
  logic [D-1:0]         m_sh    [N];
  logic [LINE_BITS-1:0] m_line  [N];

  initial begin
    int i;
    // initialise every slot
    for (i = 0; i < N; i++) begin
      @(negedge clk);
      wr_meta_en = 1; wr_data_en = 1; wr_idx = IDX'(i); wr_be = '1;
      wr_state = scp_pkg::mesi_e'(i % 4); wr_dirty = i[0]; wr_rc = RC'(i); wr_sharers = D'(i);
      wr_data = {$urandom, $urandom};
      m_state[i] = wr_state; m_dirty[i] = wr_dirty; m_rc[i] = wr_rc; m_sh[i] = wr_sharers; m_line[i] = wr_data;
    end
    @(negedge clk); wr_meta_en = 0; wr_data_en = 0;
    for (int it = 0; it < 800; it++) begin
      @(negedge clk);
      i = $urandom_range(0, N - 1);
      wr_meta_en = $urandom_range(0, 1); wr_data_en = $urandom_range(0, 1);
      wr_idx = IDX'(i); wr_be = BE'($urandom);
      wr_state = scp_pkg::mesi_e'($urandom_range(0, 3)); wr_dirty = 1'($urandom);
      wr_rc = RC'($urandom); wr_sharers = D'($urandom); wr_data = {$urandom, $urandom};
      if (wr_meta_en) begin m_state[i] = wr_state; m_dirty[i] = wr_dirty; m_rc[i] = wr_rc; m_sh[i] = wr_sharers; end
      if (wr_data_en) for (int b = 0; b < BE; b++) if (wr_be[b]) m_line[i][b*8 +: 8] = wr_data[b*8 +: 8];
      rd_en = 1; rd_idx = IDX'($urandom_range(0, N - 1));
      if (rd_idx == wr_idx) rd_idx = rd_idx + 1'b1;
      @(negedge clk);
      wr_meta_en = 0; wr_data_en = 0; rd_en = 0;
      check(rd_state == m_state[rd_idx] && rd_dirty == m_dirty[rd_idx] && rd_rc == m_rc[rd_idx] &&
            rd_sharers == m_sh[rd_idx], $sformatf("meta %0d", rd_idx));
      check(rd_data == m_line[rd_idx], $sformatf("line %0d", rd_idx));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
