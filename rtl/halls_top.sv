// halls_top: HALLS, a highly adaptable last-level STT-RAM cache for a
// multicore system, with its hardware tuner.
//
// 1MB of STT-RAM in 32 banks of 32KB, in four clusters of eight banks whose
// cells have retention times of 100us, 1ms, 10ms and 100ms (write latency
// 3/4/6/7 cycles). The cache controller serves 16B requests from the cores'
// L1 caches on the current virtual bank layout (size 128KB..1MB, line
// 16B..64B, 1..16 ways) through the set address decoder and the
// virtual-to-physical bank mapping table; banks outside the layout are shut
// down. Each bank evicts its blocks when their retention counters expire.
// The tuner, started by `tune_start` when a new application begins, measures
// tuning intervals of INTERVAL retired instructions (`instr_inc` per cycle),
// picks the lowest-latency configuration and then the least-EDP retention
// cluster for every virtual bank, and installs the result.
// Ports: CPU request/response (one 16B request at a time), main-memory
// request/ack (one 16B row per transaction), tuning control and status.
// TICK_PERIODn are the retention-counter periods of the clusters in cycles
// (retention time at 2GHz / 16).
module halls_top
  import halls_pkg::*;
#(
  parameter int unsigned TICK_PERIOD0 = 12_500,       // 100us
  parameter int unsigned TICK_PERIOD1 = 125_000,      // 1ms
  parameter int unsigned TICK_PERIOD2 = 1_250_000,    // 10ms
  parameter int unsigned TICK_PERIOD3 = 12_500_000,   // 100ms
  parameter int unsigned INTERVAL     = 10_000_000,   // instructions per tuning interval
  parameter int unsigned CW           = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  // CPU / L1 side
  input  logic                cpu_req_valid,
  output logic                cpu_req_ready,
  input  logic                cpu_req_we,
  input  logic [ADDR_W-1:0]   cpu_req_addr,
  input  logic [DATA_W-1:0]   cpu_req_wdata,
  output logic                cpu_rsp_valid,
  output logic [DATA_W-1:0]   cpu_rsp_rdata,
  output logic                cpu_rsp_hit,
  // main memory
  output logic                mem_req,
  output logic                mem_we,
  output logic [ADDR_W-1:0]   mem_addr,
  output logic [DATA_W-1:0]   mem_wdata,
  input  logic                mem_ack,
  input  logic [DATA_W-1:0]   mem_rdata,
  // tuning
  input  logic                tune_start,
  input  logic [3:0]          instr_inc,
  output logic                tuned,
  output logic [1:0]          tune_phase,
  output cfg_t                cur_cfg,
  output vmap_t               cur_map,
  output logic [N_BANKS-1:0]  bank_pwr_en,
  output logic [3:0]          cfg_samples,
  output logic [3:0]          ret_samples,
  // monitoring
  output logic                ev_miss,
  output logic                ev_writeback,
  output logic                ev_expiry_wb,
  output logic [N_BANKS-1:0]  ev_expiry_clean,   // per bank: a clean block expired
  output logic                reconf_done
);
  localparam int unsigned TP [N_CLUSTERS] = '{TICK_PERIOD0, TICK_PERIOD1, TICK_PERIOD2, TICK_PERIOD3};

  cfg_t                          tn_cfg, best_cfg;
  vmap_t                         tn_map;
  logic                          reconf_req, perf_clr, perf_en;
  logic [N_BANKS-1:0][PB_W-1:0]  p2v;
  logic [N_BANKS-1:0]            bank_sel, bank_done, exp_req, exp_ack;
  logic [N_BANKS-1:0][ROW_W-1:0] exp_row;
  bank_rsp_t [N_BANKS-1:0]       bank_rsp;
  bank_op_t                      bank_op;
  logic [N_BANKS-1:0]            ev_hit, ev_write, ev_fill;
  logic [N_BANKS-1:0][CW-1:0]    p_hits, p_writes, p_fills;
  logic [CW-1:0]                 p_cycles, min_latency;

  vbank_map_table u_map (
    .clk, .rst_n, .load(reconf_done), .cfg_in(tn_cfg), .vmap_in(tn_map),
    .cfg(cur_cfg), .vmap(cur_map), .p2v, .pwr_en(bank_pwr_en)
  );

  halls_ctrl u_ctrl (
    .clk, .rst_n,
    .cpu_req_valid, .cpu_req_ready, .cpu_req_we, .cpu_req_addr, .cpu_req_wdata,
    .cpu_rsp_valid, .cpu_rsp_rdata, .cpu_rsp_hit,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata,
    .cfg(cur_cfg), .vmap(cur_map), .p2v, .pwr_en(bank_pwr_en),
    .reconf_req, .reconf_done,
    .bank_sel, .bank_op, .bank_done, .bank_rsp, .exp_req, .exp_row, .exp_ack,
    .ev_hit, .ev_write, .ev_fill, .ev_miss, .ev_writeback, .ev_expiry_wb
  );

  for (genvar c = 0; c < N_CLUSTERS; c++) begin : g_cluster
    localparam int L = c * BANKS_PER_CL;
    retention_cluster #(.W_LAT(WLAT[c]), .TICK_PERIOD(TP[c])) u_cluster (
      .clk, .rst_n,
      .pwr_en (bank_pwr_en[L +: BANKS_PER_CL]),
      .sel    (bank_sel[L +: BANKS_PER_CL]),
      .op     (bank_op),
      .ready  (),
      .done   (bank_done[L +: BANKS_PER_CL]),
      .rsp    (bank_rsp[L +: BANKS_PER_CL]),
      .exp_req(exp_req[L +: BANKS_PER_CL]),
      .exp_row(exp_row[L +: BANKS_PER_CL]),
      .exp_ack(exp_ack[L +: BANKS_PER_CL]),
      .exp_clean(ev_expiry_clean[L +: BANKS_PER_CL])
    );
  end

  bank_perf_counters #(.CW(CW)) u_perf (
    .clk, .rst_n, .clr(perf_clr), .en(perf_en),
    .ev_hit, .ev_write, .ev_fill,
    .hits(p_hits), .writes(p_writes), .fills(p_fills), .cycles(p_cycles)
  );

  halls_tuner #(.CW(CW), .INTERVAL(INTERVAL)) u_tuner (
    .clk, .rst_n, .tune_start, .instr_inc,
    .reconf_req, .reconf_cfg(tn_cfg), .reconf_map(tn_map), .reconf_done,
    .perf_clr, .perf_en,
    .hits(p_hits), .writes(p_writes), .fills(p_fills), .cycles(p_cycles),
    .tuned, .phase(tune_phase), .best_cfg, .min_latency,
    .cfg_samples, .ret_samples
  );
endmodule
