// retention_tick: clock of the per-block retention counters of one cluster.
//
// The paper clocks each block's lifetime counter with a period equal to the
// cluster's retention time divided by N, N being the eviction granularity.
// With the paper's 4-bit counter this design takes N = 16, so the default
// PERIOD is the retention time in cycles at the paper's 2GHz clock divided by
// 16 (100us -> 12500 cycles). A block is evicted 15 ticks after its last
// write, i.e. between 14/16 and 15/16 of the retention time, never after it
// has expired. `tick` is a one-cycle pulse every PERIOD cycles after reset.
module retention_tick #(
  parameter int unsigned PERIOD = 12500
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick
);
  localparam int W = $clog2(PERIOD + 1);
  logic [W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (cnt == W'(PERIOD - 1)) begin
      cnt  <= '0;
      tick <= 1'b1;
    end else begin
      cnt  <= cnt + 1'b1;
      tick <= 1'b0;
    end
  end
endmodule
