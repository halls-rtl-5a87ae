// tb_halls_top: end-to-end run of the whole cache with its tuner, at reduced
// retention-counter periods (3000/5000/8000/20000 cycles instead of
// 12.5K..12.5M) and a 4000-instruction tuning interval instead of 10M.
// A modelled core retires one instruction per cycle and stalls while its
// cache access is outstanding, so a tuning interval's cycle count reflects
// the cache's latency. Its accesses mix a small hot region with a wider
// footprint; every read is compared with a reference copy of memory.
// The run: traffic on the reset layout, then `tune_start` and traffic
// through all tuning intervals until the tuner reports done, then traffic on
// the tuned layout, then an idle period longer than 15 ticks of the slowest
// cluster so that lines expire, then reading those lines back.
// Each mechanism is counted and a failure is counted for any that never
// happened: hit, miss, dirty write-back of a victim, clean expiry, dirty
// expiry with write-back, reconfiguration (flush), bank shutdown, both
// tuning phases (configuration samples, four retention samples) and the
// final install. Also checked: read-hit latency of 6 cycles (2-cycle bank
// hit plus 4 controller cycles) and that the powered banks are exactly the
// ones mapped by the tuned layout.
module tb_halls_top;
  import halls_pkg::*;
  localparam int unsigned INTERVAL = 4000;
  logic clk = 0, rst_n = 0;
  logic cpu_req_valid = 0, cpu_req_ready, cpu_req_we = 0;
  logic [ADDR_W-1:0] cpu_req_addr = '0;
  logic [DATA_W-1:0] cpu_req_wdata = '0, cpu_rsp_rdata;
  logic cpu_rsp_valid, cpu_rsp_hit;
  logic mem_req, mem_we, mem_ack;
  logic [ADDR_W-1:0] mem_addr;
  logic [DATA_W-1:0] mem_wdata, mem_rdata;
  logic tune_start = 0, tuned;
  logic [3:0] instr_inc;
  logic [1:0] tune_phase;
  cfg_t cur_cfg;
  vmap_t cur_map;
  logic [N_BANKS-1:0] bank_pwr_en, ev_expiry_clean;
  logic [3:0] cfg_samples, ret_samples;
  logic ev_miss, ev_writeback, ev_expiry_wb, reconf_done;

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0, n_exp_dirty = 0, n_exp_clean = 0;
  int n_reconf = 0, n_shutdown = 0;
  bit waiting = 0;
  logic [DATA_W-1:0] refm [logic [ADDR_W-1:0]];

  halls_top #(.TICK_PERIOD0(3000), .TICK_PERIOD1(5000), .TICK_PERIOD2(8000),
              .TICK_PERIOD3(20000), .INTERVAL(INTERVAL)) dut (.*);
  mem_model #(.LAT(5)) u_mem (.*);

  always #5 clk = ~clk;
  assign instr_inc = (rst_n && !waiting) ? 4'd1 : 4'd0;   // core stalls on the cache

  always @(posedge clk) if (rst_n) begin
    n_wb        += ev_writeback;
    n_exp_dirty += ev_expiry_wb;
    n_exp_clean += $countones(ev_expiry_clean);
    n_reconf    += reconf_done;
    if (rst_n && bank_pwr_en != '1) n_shutdown++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [DATA_W-1:0] ref_rd(logic [ADDR_W-1:0] a);
    return refm.exists(a) ? refm[a] : u_mem.init_word(a);
  endfunction

  task automatic access(bit we, logic [ADDR_W-1:0] a, output int lat, output bit hit);
    logic [DATA_W-1:0] d;
    a[3:0] = 0;
    d = {$urandom, $urandom, $urandom, $urandom};
    waiting = 1;
    cpu_req_valid <= 1; cpu_req_we <= we; cpu_req_addr <= a; cpu_req_wdata <= d;
    @(posedge clk);
    while (!cpu_req_ready) @(posedge clk);
    cpu_req_valid <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!cpu_rsp_valid);
    waiting = 0;
    hit = cpu_rsp_hit;
    if (hit) n_hit++; else n_miss++;
    if (we) refm[a] = d;
    else check(cpu_rsp_rdata == ref_rd(a), $sformatf("read %h: %h vs %h", a, cpu_rsp_rdata, ref_rd(a)));
  endtask

  task automatic traffic(int n);
    int lat; bit hit;
    for (int i = 0; i < n; i++) begin
      logic [ADDR_W-1:0] a;
      if ($urandom_range(0, 1) == 0) a = ($urandom & 32'h3FFF) | 32'h0100_0000;
      else a = ($urandom & 32'h3F_FFFF) | 32'h0100_0000;
      access($urandom_range(0, 2) == 0, a, lat, hit);
      repeat ($urandom_range(0, 6)) @(posedge clk);
    end
  endtask

  initial begin
    int lat; bit hit;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    traffic(500);
    access(0, 32'h0100_0040, lat, hit);
    access(0, 32'h0100_0040, lat, hit);
    check(hit && lat == HIT_LAT + 4, $sformatf("read hit latency %0d", lat));
    tune_start <= 1; @(posedge clk); tune_start <= 0;
    while (!tuned) traffic(50);
    $display("tuned: size 2^%0d banks, line %0dB, %0d ways; %0d configuration and %0d retention samples",
             cur_cfg.size_lg, 16 << cur_cfg.line_lg, 1 << cur_cfg.way_lg, cfg_samples, ret_samples);
    for (int v = 0; v < (1 << cur_cfg.size_lg); v++)
      $display("  VBank %0d -> cluster %0d bank %0d", v, cur_map[v].cluster, cur_map[v].bank);
    begin
      logic [N_BANKS-1:0] want;
      want = '0;
      for (int v = 0; v < (1 << cur_cfg.size_lg); v++) want[pbank_idx(cur_map[v])] = 1'b1;
      check(bank_pwr_en == want, "powered banks are the mapped ones");
    end
    traffic(1000);
    // let lines expire in every cluster, then read back the hot region
    repeat (16 * 20000 + 3000) @(posedge clk);
    for (int i = 0; i < 64; i++) access(0, 32'h0100_0000 + i * 16, lat, hit);
    check(n_hit > 0,        $sformatf("hits %0d", n_hit));
    check(n_miss > 0,       $sformatf("misses %0d", n_miss));
    check(n_wb > 0,         $sformatf("dirty victim write-backs %0d", n_wb));
    check(n_exp_clean > 0,  $sformatf("clean expiries %0d", n_exp_clean));
    check(n_exp_dirty > 0,  $sformatf("dirty expiries written back %0d", n_exp_dirty));
    check(n_reconf > 2,     $sformatf("reconfigurations %0d", n_reconf));
    check(n_shutdown > 0,   $sformatf("cycles with banks shut down %0d", n_shutdown));
    check(cfg_samples > 1,  $sformatf("configuration samples %0d", cfg_samples));
    check(ret_samples == 4, $sformatf("retention samples %0d", ret_samples));
    check(tuned && tune_phase == 3, "tuning finished");
    $display("hits %0d misses %0d victim write-backs %0d clean expiries %0d dirty expiries %0d",
             n_hit, n_miss, n_wb, n_exp_clean, n_exp_dirty);
    $display("reconfigurations %0d cycles with banks shut down %0d", n_reconf, n_shutdown);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog: tuning phase %0d", tune_phase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
