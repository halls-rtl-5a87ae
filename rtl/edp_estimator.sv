// edp_estimator: energy, delay and energy-delay product of one physical bank
// over a tuning interval, the energy-estimation datapath of the HALLS tuner.
//
// Combinational. The paper combines counter statistics with predefined
// STT-RAM access parameters to estimate energy and uses EDP as the objective
// of retention time tuning. This design's model, per bank of cluster c:
//   energy = hits*E_HIT + writes*E_WR[c] + cycles*LEAK       (fJ)
//   delay  = hits*HIT_LAT + writes*WLAT[c] + fills*MISS_PEN  (cycles)
//   edp    = energy * delay
// The defaults take the 1MB/64B/16-way column of Table 2: write energy
// 0.392/0.404/0.419/0.438 nJ, hit energy 5.794 nJ spread over the 16 banks a
// 16-way lookup reads (362125 fJ), leakage 2200.032 mW spread over 32 banks
// at a 2GHz clock (34376 fJ per bank-cycle), write latency 3/4/6/7 cycles,
// hit latency 2. MISS_PEN (main-memory penalty) is not given by the paper.
module edp_estimator
  import halls_pkg::*;
#(
  parameter int unsigned CW        = 32,
  parameter longint unsigned E_HIT = 362125,
  parameter longint unsigned E_WR0 = 392000,
  parameter longint unsigned E_WR1 = 404000,
  parameter longint unsigned E_WR2 = 419000,
  parameter longint unsigned E_WR3 = 438000,
  parameter longint unsigned LEAK  = 34376,
  parameter int unsigned MISS_PEN  = 100
) (
  input  logic [1:0]     cluster,
  input  logic [CW-1:0]  hits,
  input  logic [CW-1:0]  writes,
  input  logic [CW-1:0]  fills,
  input  logic [CW-1:0]  cycles,
  output logic [63:0]    energy,
  output logic [47:0]    delay,
  output logic [111:0]   edp
);
  logic [63:0] e_wr;
  logic [47:0] w_lat;

  always_comb begin
    unique case (cluster)
      2'd0: begin e_wr = 64'(E_WR0); w_lat = 48'(WLAT[0]); end
      2'd1: begin e_wr = 64'(E_WR1); w_lat = 48'(WLAT[1]); end
      2'd2: begin e_wr = 64'(E_WR2); w_lat = 48'(WLAT[2]); end
      default: begin e_wr = 64'(E_WR3); w_lat = 48'(WLAT[3]); end
    endcase
    energy = 64'(hits) * 64'(E_HIT) + 64'(writes) * e_wr + 64'(cycles) * 64'(LEAK);
    delay  = 48'(hits) * 48'(HIT_LAT) + 48'(writes) * w_lat + 48'(fills) * 48'(MISS_PEN);
    edp    = 112'(energy) * 112'(delay);
  end
endmodule
