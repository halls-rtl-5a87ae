// retention_tuner: HALLS retention time tuning (the paper's Algorithm 2).
//
// Input: the number of virtual banks of the chosen configuration (2^size_lg).
// The tuner runs four sampling intervals, one per retention time tuning set.
// In set t virtual bank v is placed in cluster (v+t) mod 4, bank v/4 (the
// paper's Table 1 for four virtual banks; v/4 as BankID extends it to 32
// virtual banks, eight per cluster, which the paper says is possible). After
// each interval it reads the performance counters of the physical bank that
// served each virtual bank, one virtual bank per cycle, and stores the bank's
// EDP (edp_estimator) in that virtual bank's EDP entry for the cluster.
// After set 3 it allocates, in virtual bank order, each virtual bank to the
// cluster of least EDP that still has a free bank (each cluster has eight),
// taking that cluster's next free BankID. Ties go to the lower ClusterID.
//
// Handshake: `start` pulse; for each set `sample_req` stays high with the
// set's mapping on `samp_map` until `sample_done` pulses, after which the
// counters must hold that interval's counts until the tuner has read them
// (NV cycles). `done` then stays high with `final_map` until the next start.
module retention_tuner
  import halls_pkg::*;
#(
  parameter int unsigned CW = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [2:0]                  size_lg,
  output logic                        sample_req,
  output vmap_t                       samp_map,
  input  logic                        sample_done,
  input  logic [N_BANKS-1:0][CW-1:0]  hits,
  input  logic [N_BANKS-1:0][CW-1:0]  writes,
  input  logic [N_BANKS-1:0][CW-1:0]  fills,
  input  logic [CW-1:0]               cycles,
  output logic                        done,
  output vmap_t                       final_map
);
  typedef enum logic [2:0] {S_IDLE, S_SAMPLE, S_COLLECT, S_ALLOC, S_DONE} state_t;

  state_t            state;
  logic [1:0]        t;
  logic [PB_W:0]     v;
  logic [PB_W:0]     nv;
  logic [111:0]      edp_tab [N_BANKS*N_CLUSTERS];   // index {vbank, cluster}
  logic [3:0]        free_q [N_CLUSTERS];

  // mapping of tuning set t
  always_comb
    for (int i = 0; i < N_BANKS; i++) begin
      samp_map[i].cluster = 2'((i + int'(t)) % N_CLUSTERS);
      samp_map[i].bank    = 3'(i / N_CLUSTERS);
    end

  // EDP of the physical bank serving virtual bank v in the current set
  logic [PB_W-1:0] pb;
  logic [1:0]      cl;
  logic [111:0]    edp;
  assign cl = samp_map[PB_W'(v)].cluster;
  assign pb = PB_W'(pbank_idx(samp_map[PB_W'(v)]));

  edp_estimator #(.CW(CW)) u_edp (
    .cluster(cl), .hits(hits[pb]), .writes(writes[pb]), .fills(fills[pb]),
    .cycles(cycles), .energy(), .delay(), .edp(edp)
  );

  // findMin over clusters that still have a free bank
  logic [1:0] best_c;
  logic       found;
  always_comb begin
    best_c = '0;
    found  = 1'b0;
    for (int c = 0; c < N_CLUSTERS; c++)
      if (free_q[c] != 0 && (!found || edp_tab[{PB_W'(v), 2'(c)}] < edp_tab[{PB_W'(v), best_c}])) begin
        best_c = 2'(c);
        found  = 1'b1;
      end
  end

  assign sample_req = state == S_SAMPLE;
  assign done       = state == S_DONE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      t         <= '0;
      v         <= '0;
      nv        <= '0;
      final_map <= cfg_tuning_map();
      for (int c = 0; c < N_CLUSTERS; c++) free_q[c] <= 4'(BANKS_PER_CL);
    end else if (start) begin
      state <= S_SAMPLE;
      t     <= '0;
      v     <= '0;
      nv    <= (PB_W+1)'(1) << size_lg;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: ;
        S_SAMPLE: if (sample_done) begin
          v     <= '0;
          state <= S_COLLECT;
        end
        S_COLLECT: begin
          edp_tab[{PB_W'(v), cl}] <= edp;
          if (v == nv - 1'b1) begin
            v <= '0;
            if (t == 2'd3) begin
              state <= S_ALLOC;
              for (int c = 0; c < N_CLUSTERS; c++) free_q[c] <= 4'(BANKS_PER_CL);
            end else begin
              t     <= t + 1'b1;
              state <= S_SAMPLE;
            end
          end else v <= v + 1'b1;
        end
        S_ALLOC: begin
          final_map[PB_W'(v)].cluster <= best_c;
          final_map[PB_W'(v)].bank    <= 3'(4'(BANKS_PER_CL) - free_q[best_c]);
          free_q[best_c]              <= free_q[best_c] - 1'b1;
          if (v == nv - 1'b1) begin
            t     <= '0;
            state <= S_DONE;
          end else v <= v + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_found: assert property (@(posedge clk) disable iff (!rst_n) state == S_ALLOC |-> found);
endmodule
