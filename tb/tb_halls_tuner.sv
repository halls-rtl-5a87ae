// tb_halls_tuner: the tuning sequencer with both algorithms inside it and a
// modelled cache around it. The model answers every reconfiguration request
// after a few cycles and then retires one instruction per cycle, after a
// number of stall cycles that depends on the sampled configuration (lowest
// at 256KB, 32B lines, 2 ways). Its performance counters are filled per
// physical bank from the mapping in force: even virtual banks are
// write-heavy short-lived data (cheapest in the 100us cluster), odd virtual
// banks hold long-lived data that misses when kept in any cluster shorter
// than 100ms. Checked: every interval lasts exactly INTERVAL instructions
// (counted by the model), configuration samples use the tuning mapping,
// retention samples use the four tuning sets of the paper's tuning-set table,
// the chosen configuration and its latency, four retention samples, and the
// final mapping (even VBanks in 100us banks 0..3, odd ones in 100ms banks 0..3).
module tb_halls_tuner;
  import halls_pkg::*;
  localparam int unsigned CW = 32, INTERVAL = 200;
  logic clk = 0, rst_n = 0, tune_start = 0, reconf_done = 0;
  logic [3:0] instr_inc = 0;
  logic reconf_req, perf_clr, perf_en, tuned;
  cfg_t reconf_cfg, best_cfg, cur_cfg;
  vmap_t reconf_map, cur_map;
  logic [N_BANKS-1:0][CW-1:0] hits, writes, fills;
  logic [CW-1:0] cycles, min_latency;
  logic [1:0] phase;
  logic [3:0] cfg_samples, ret_samples;
  int checks = 0, failures = 0;

  halls_tuner #(.CW(CW), .INTERVAL(INTERVAL)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int penalty(cfg_t c);
    return 30 * (c.size_lg > 3 ? c.size_lg - 3 : 3 - c.size_lg)
         + 20 * (c.line_lg > 1 ? c.line_lg - 1 : 1 - c.line_lg)
         + 10 * (c.way_lg > 1 ? c.way_lg - 1 : 1 - c.way_lg) + 5;
  endfunction

  // modelled cache
  int n_cfg = 0, n_ret = 0, stall = 0, run_cycles = 0, retired = 0;
  always @(posedge clk) begin
    if (perf_clr) begin
      cycles <= '0; hits <= '0; writes <= '0; fills <= '0;
      run_cycles = 0; retired = 0;
    end
    if (perf_en) begin
      cycles <= cycles + 1;
      run_cycles++;
      retired += instr_inc;
    end
  end
  always @(negedge clk) begin
    instr_inc <= (perf_en && stall-- <= 0) ? 4'd1 : 4'd0;
  end

  initial begin
    cycles = '0; hits = '0; writes = '0; fills = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    tune_start <= 1; @(posedge clk); tune_start <= 0;
    while (!tuned) begin
      @(posedge clk);
      if (reconf_req && !reconf_done) begin
        bit final_install;
        cur_cfg = reconf_cfg; cur_map = reconf_map;
        final_install = phase == 2 && n_ret == 4;
        if (final_install) begin
          // the chosen layout is installed; no interval follows
        end else if (phase == 1) begin
          n_cfg++;
          check(cur_map == cfg_tuning_map(), "configuration samples use the tuning mapping");
        end else if (phase == 2) begin
          for (int v = 0; v < 8; v++)
            check(cur_map[v] == pbank_t'({2'((v + n_ret) % 4), 3'(v / 4)}),
                  $sformatf("tuning set %0d VBank %0d", n_ret, v));
          n_ret++;
        end
        repeat ($urandom_range(2, 9)) @(posedge clk);
        reconf_done <= 1; @(posedge clk); reconf_done <= 0;
        if (final_install) continue;
        stall = penalty(cur_cfg);
        // counters of this interval, by physical bank, written while the
        // interval runs (they are read only after it ends)
        wait (perf_en);
        @(posedge clk);
        for (int v = 0; v < (1 << cur_cfg.size_lg); v++) begin
          int p;
          p = pbank_idx(cur_map[v]);
          hits[p]   = 2000;
          writes[p] = v % 2 == 0 ? 3000 : 50;
          fills[p]  = (v % 2 == 1 && cur_map[v].cluster != 3) ? 5000 : 0;
        end
        wait (!perf_en && run_cycles > 0);
        check(retired == INTERVAL, $sformatf("interval retired %0d", retired));
        check(run_cycles == INTERVAL + penalty(cur_cfg),
              $sformatf("interval latency %0d for cfg %p", run_cycles, cur_cfg));
        run_cycles = 0;
      end
    end
    check(best_cfg == cfg_t'({3'd3, 2'd1, 3'd1}), $sformatf("best cfg %p", best_cfg));
    check(min_latency == INTERVAL + 5, $sformatf("min latency %0d", min_latency));
    check(ret_samples == 4 && n_ret == 4, "four retention samples");
    check(cfg_samples == 4'(n_cfg), "configuration sample count");
    check(cur_cfg == best_cfg, "final configuration installed");
    for (int v = 0; v < 8; v++)
      check(cur_map[v] == pbank_t'({v % 2 == 0 ? 2'd0 : 2'd3, 3'(v / 2)}),
            $sformatf("final VBank %0d -> %0d", v, cur_map[v]));
    check(phase == 3, "phase done");
    $display("configuration samples %0d", n_cfg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
