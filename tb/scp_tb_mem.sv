// scp_tb_mem: behavioural main memory for the SCP slice testbenches.
// Serves one line read at a time after a latency drawn uniformly from
// [lat_min, lat_max] cycles, accepts writebacks at once, and counts both.
// A line never written holds a pattern computed from its address
// (`pattern`), so testbenches can predict fill data without a table.
module scp_tb_mem #(
  parameter int LADDR_BITS = 16,
  parameter int LINE_BITS  = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  int                    lat_min,
  input  int                    lat_max,
  input  logic                  mem_rd_valid,
  output logic                  mem_rd_ready,
  input  logic [LADDR_BITS-1:0] mem_rd_addr,
  output logic                  mem_rsp_valid,
  output logic [LINE_BITS-1:0]  mem_rsp_data,
  input  logic                  mem_wb_valid,
  output logic                  mem_wb_ready,
  input  logic [LADDR_BITS-1:0] mem_wb_addr,
  input  logic [LINE_BITS-1:0]  mem_wb_data
);
  logic [LINE_BITS-1:0] store [logic [LADDR_BITS-1:0]];
  int reads = 0, writebacks = 0;
  int wait_cnt = -1;
  logic [LADDR_BITS-1:0] pend_addr;

  function automatic logic [LINE_BITS-1:0] pattern(logic [LADDR_BITS-1:0] a);
    logic [LINE_BITS-1:0] v;
    for (int i = 0; i < LINE_BITS / 32; i++) v[i*32 +: 32] = (32'(a) * 32'h9E3779B1) ^ (32'(i) << 24);
    return v;
  endfunction

  function automatic logic [LINE_BITS-1:0] peek(logic [LADDR_BITS-1:0] a);
    return store.exists(a) ? store[a] : pattern(a);
  endfunction

  assign mem_rd_ready = (wait_cnt < 0);
  assign mem_wb_ready = 1'b1;

  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (!rst_n) begin
      wait_cnt <= -1;
    end else begin
      if (mem_rd_valid && mem_rd_ready) begin
        reads++;
        pend_addr <= mem_rd_addr;
        // the response pulse comes `lat` cycles after the request cycle
        wait_cnt  <= $urandom_range(lat_min, lat_max) - 2;
      end else if (wait_cnt == 0) begin
        mem_rsp_valid <= 1'b1;
        mem_rsp_data  <= peek(pend_addr);
        wait_cnt <= -1;
      end else if (wait_cnt > 0) begin
        wait_cnt <= wait_cnt - 1;
      end
      if (mem_wb_valid) begin
        writebacks++;
        store[mem_wb_addr] = mem_wb_data;
      end
    end
  end
endmodule
