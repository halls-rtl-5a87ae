// bank_perf_counters: the hardware performance counters HALLS's tuner reads
// after each tuning interval.
//
// For every physical bank it counts hits, writes (write hits and line fills,
// one per 16B row written) and misses that were filled into the bank; it also
// counts the cycles of the interval. The paper lists read requests, write
// requests and writebacks as examples of the statistics combined with the
// per-access STT-RAM parameters; the exact set kept per bank is this design's.
// `clr` zeroes all counters, counting happens only while `en` is high.
// Counters saturate at their maximum.
module bank_perf_counters
  import halls_pkg::*;
#(
  parameter int unsigned CW = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  input  logic                        en,
  input  logic [N_BANKS-1:0]          ev_hit,
  input  logic [N_BANKS-1:0]          ev_write,
  input  logic [N_BANKS-1:0]          ev_fill,
  output logic [N_BANKS-1:0][CW-1:0]  hits,
  output logic [N_BANKS-1:0][CW-1:0]  writes,
  output logic [N_BANKS-1:0][CW-1:0]  fills,
  output logic [CW-1:0]               cycles
);
  function automatic logic [CW-1:0] inc(logic [CW-1:0] v, logic e);
    return (e && v != '1) ? v + 1'b1 : v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hits <= '0; writes <= '0; fills <= '0; cycles <= '0;
    end else if (clr) begin
      hits <= '0; writes <= '0; fills <= '0; cycles <= '0;
    end else if (en) begin
      cycles <= inc(cycles, 1'b1);
      for (int b = 0; b < N_BANKS; b++) begin
        hits[b]   <= inc(hits[b],   ev_hit[b]);
        writes[b] <= inc(writes[b], ev_write[b]);
        fills[b]  <= inc(fills[b],  ev_fill[b]);
      end
    end
  end
endmodule
