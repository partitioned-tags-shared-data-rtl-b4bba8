// scp_latency_mask: constant-time response release.
//
// A request's response may leave the slice only once a fixed number of
// cycles has passed since the request was accepted. The controller selects
// the target when it knows the path: the LLC hit latency for a hit in the
// requester's own tag partition, and the memory-miss latency T_miss for
// every PeerProbe, whether another partition held the line or not. A line
// found in another partition is therefore buffered and held back until it
// looks exactly like a memory miss, and a negative Bloom-filter answer does
// not shorten the wait either.
//
// Interface and timing: `start` marks the acceptance cycle; `elapsed` is the
// number of cycles since then (1 in the cycle after `start`). `release_ok` is high from
// the cycle with `elapsed >= target`. `overrun` is high in every cycle where
// release is due (`elapsed >= target`) but `data_ready` is still low, i.e. a
// true miss whose memory answer came later than T_miss; such a response
// leaves when it is ready.
module scp_latency_mask #(
  parameter int unsigned CNT_BITS = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [CNT_BITS-1:0] target,
  input  logic                data_ready,
  output logic                release_ok,
  output logic                overrun,
  output logic [CNT_BITS-1:0] elapsed
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      elapsed <= '0;
    end else if (start) begin
      elapsed <= CNT_BITS'(1);
    end else if (elapsed != '1) begin
      elapsed <= elapsed + 1'b1;
    end
  end

  assign release_ok = !start && (elapsed >= target) && data_ready;
  assign overrun    = !start && (elapsed >= target) && !data_ready;
endmodule
