// halls_tuner: the hardware cache tuner of HALLS, which sequences the two
// tuning phases of the paper's flow figure.
//
// On `tune_start` (a new application starts) it runs config_tuner (Algorithm
// 1) and then retention_tuner (Algorithm 2), and finally installs the chosen
// configuration with the retention-tuned virtual-to-physical mapping. Every
// sample of either algorithm is one tuning interval of INTERVAL retired
// instructions (paper: 10M):
//   1. ask the cache controller to switch to the sample's layout and mapping
//      (reconf_req with reconf_cfg/reconf_map, held until reconf_done; the
//      controller first writes back and empties the cache),
//   2. clear the performance counters, count while instructions retire,
//   3. at INTERVAL instructions stop counting; the interval's latency is the
//      cycle count, which goes to config_tuner; the per-bank counters stay
//      frozen for retention_tuner to read.
// During configuration tuning the virtual banks are placed in the 10ms
// cluster first (halls_pkg::cfg_tuning_map), following the flow figure's
// "Retention time: 10ms" for that phase; with more than eight banks the rest
// spill into the 100ms, 100us and 1ms clusters, this design's choice.
// `instr_inc` is the number of instructions the cores retired this cycle.
module halls_tuner
  import halls_pkg::*;
#(
  parameter int unsigned CW       = 32,
  parameter int unsigned INTERVAL = 10_000_000
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        tune_start,
  input  logic [3:0]                  instr_inc,
  output logic                        reconf_req,
  output cfg_t                        reconf_cfg,
  output vmap_t                       reconf_map,
  input  logic                        reconf_done,
  output logic                        perf_clr,
  output logic                        perf_en,
  input  logic [N_BANKS-1:0][CW-1:0]  hits,
  input  logic [N_BANKS-1:0][CW-1:0]  writes,
  input  logic [N_BANKS-1:0][CW-1:0]  fills,
  input  logic [CW-1:0]               cycles,
  output logic                        tuned,
  output logic [1:0]                  phase,      // 0 idle, 1 config, 2 retention, 3 done
  output cfg_t                        best_cfg,
  output logic [CW-1:0]               min_latency,
  output logic [3:0]                  cfg_samples,
  output logic [3:0]                  ret_samples
);
  typedef enum logic [2:0] {T_IDLE, T_WAIT, T_RECONF, T_START, T_RUN, T_FINAL, T_DONE} tstate_t;
  localparam logic [1:0] PH_IDLE = 2'd0, PH_CFG = 2'd1, PH_RET = 2'd2, PH_DONE = 2'd3;

  tstate_t        st;
  logic           ct_start, rt_start, sample_done;
  logic           ct_req, ct_done, rt_req, rt_done;
  cfg_t           ct_cfg;
  vmap_t          rt_map, rt_final;
  logic [CW-1:0]  icount;
  logic [2:0]     size_lg_q;

  config_tuner #(.LW(CW)) u_cfg (
    .clk, .rst_n, .start(ct_start), .sample_req(ct_req), .cur_cfg(ct_cfg),
    .sample_done, .latency(cycles), .done(ct_done), .best_cfg, .min_latency,
    .n_samples(cfg_samples)
  );

  retention_tuner #(.CW(CW)) u_ret (
    .clk, .rst_n, .start(rt_start), .size_lg(size_lg_q), .sample_req(rt_req),
    .samp_map(rt_map), .sample_done, .hits, .writes, .fills, .cycles,
    .done(rt_done), .final_map(rt_final)
  );

  assign reconf_req = st == T_RECONF || st == T_FINAL;
  assign perf_clr   = st == T_START;
  assign perf_en    = st == T_RUN;
  assign tuned      = st == T_DONE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= T_IDLE;
      phase       <= PH_IDLE;
      ct_start    <= 1'b0;
      rt_start    <= 1'b0;
      sample_done <= 1'b0;
      icount      <= '0;
      reconf_cfg  <= CFG_MAX;
      reconf_map  <= cfg_tuning_map();
      size_lg_q   <= CFG_MAX.size_lg;
      ret_samples <= '0;
    end else begin
      ct_start    <= 1'b0;
      rt_start    <= 1'b0;
      sample_done <= 1'b0;
      if (tune_start) begin
        st          <= T_WAIT;
        phase       <= PH_CFG;
        ct_start    <= 1'b1;
        ret_samples <= '0;
      end else begin
        unique case (st)
          T_IDLE, T_DONE: ;
          T_WAIT: begin
            if (ct_start || rt_start || sample_done) begin
              // let the sub-tuner react to the last pulse first
            end else if (phase == PH_CFG && ct_req) begin
              reconf_cfg <= ct_cfg;
              reconf_map <= cfg_tuning_map();
              st         <= T_RECONF;
            end else if (phase == PH_CFG && ct_done) begin
              phase     <= PH_RET;
              size_lg_q <= best_cfg.size_lg;
              rt_start  <= 1'b1;
            end else if (phase == PH_RET && rt_req) begin
              reconf_cfg  <= best_cfg;
              reconf_map  <= rt_map;
              ret_samples <= ret_samples + 1'b1;
              st          <= T_RECONF;
            end else if (phase == PH_RET && rt_done) begin
              reconf_cfg <= best_cfg;
              reconf_map <= rt_final;
              st         <= T_FINAL;
            end
          end
          T_RECONF: if (reconf_done) st <= T_START;
          T_START: begin
            icount <= '0;
            st     <= T_RUN;
          end
          T_RUN: begin
            if (icount + CW'(instr_inc) >= CW'(INTERVAL)) begin
              sample_done <= 1'b1;
              st          <= T_WAIT;
            end
            icount <= icount + CW'(instr_inc);
          end
          T_FINAL: if (reconf_done) begin
            st    <= T_DONE;
            phase <= PH_DONE;
          end
          default: st <= T_IDLE;
        endcase
      end
    end
  end
endmodule
