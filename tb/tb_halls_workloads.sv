// tb_halls_workloads: the whole cache tuned for two synthetic programs that
// stand for the two extremes of block lifetime (the evaluated programs
// themselves cannot be run in RTL simulation). Counter periods are
// 2500/5000/20000/80000 cycles, so lines live about 37K, 75K, 300K and
// 1.2M cycles after their last write; one tuning interval is 200K
// instructions (one per cycle while the core is not waiting on the cache).
// Program "long": reads a 16KB table in passes that start every 60K cycles
// and never writes it. In the 100us and 1ms clusters its lines expire
// between passes and must be fetched again, so the tuner must place the
// virtual bank that holds the table (VBank0: the table sits at the start
// of set group 0 and fills way 0 first) in the 10ms or 100ms cluster; after
// tuning, passes 60K cycles apart must then hit (>= 95%).
// Program "short": rewrites a 4KB buffer continuously (each line about
// every 2.5K cycles), so no line reaches even the shortest retention time and the cheapest, fastest writes win: VBank0
// must go to the 100us cluster. Both runs check read data against a
// reference copy and that the tuner finished with four retention samples.
module tb_halls_workloads;
  import halls_pkg::*;
  localparam int unsigned INTERVAL = 200_000;
  localparam logic [ADDR_W-1:0] BASE = 32'h0100_0000;
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
  int n_hit, n_acc;
  bit waiting = 0;
  logic [DATA_W-1:0] refm [logic [ADDR_W-1:0]];

  halls_top #(.TICK_PERIOD0(2500), .TICK_PERIOD1(5000), .TICK_PERIOD2(20000),
              .TICK_PERIOD3(80000), .INTERVAL(INTERVAL)) dut (.*);
  mem_model #(.LAT(5)) u_mem (.*);

  always #5 clk = ~clk;
  assign instr_inc = (rst_n && !waiting) ? 4'd1 : 4'd0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [DATA_W-1:0] ref_rd(logic [ADDR_W-1:0] a);
    return refm.exists(a) ? refm[a] : u_mem.init_word(a);
  endfunction

  task automatic access(bit we, logic [ADDR_W-1:0] a);
    logic [DATA_W-1:0] d;
    d = {$urandom, $urandom, $urandom, $urandom};
    waiting = 1;
    cpu_req_valid <= 1; cpu_req_we <= we; cpu_req_addr <= a; cpu_req_wdata <= d;
    @(posedge clk);
    while (!cpu_req_ready) @(posedge clk);
    cpu_req_valid <= 0;
    do @(posedge clk); while (!cpu_rsp_valid);
    waiting = 0;
    n_acc++;
    n_hit += cpu_rsp_hit;
    if (we) refm[a] = d;
    else check(cpu_rsp_rdata == ref_rd(a), $sformatf("read %h", a));
  endtask

  // one pass over the 16KB table, then idle until 60K cycles after its start
  task automatic long_pass();
    int t0;
    t0 = 0;
    fork
      begin for (int i = 0; i < 1024; i++) access(0, BASE + i * 16); end
      forever begin @(posedge clk); t0++; end
    join_any
    disable fork;
    repeat (60_000 - t0) @(posedge clk);
  endtask

  task automatic short_burst();
    for (int i = 0; i < 200; i++) begin
      logic [ADDR_W-1:0] a;
      a = BASE + ($urandom_range(0, 255) * 16);
      access($urandom_range(0, 9) < 7, a);
      repeat ($urandom_range(10, 30)) @(posedge clk);   // the core computes
    end
  endtask

  task automatic tune();
    tune_start <= 1; @(posedge clk); tune_start <= 0;
  endtask

  task automatic show(string name);
    $display("%s: %0dKB, %0dB lines, %0d ways; VBank0 in cluster %0d bank %0d; %0d configuration samples",
             name, 32 << cur_cfg.size_lg, 16 << cur_cfg.line_lg, 1 << cur_cfg.way_lg,
             cur_map[0].cluster, cur_map[0].bank, cfg_samples);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // program "long"
    tune();
    while (!tuned) long_pass();
    show("long-lived reads");
    check(ret_samples == 4, "long: four retention samples");
    check(cur_map[0].cluster >= 2, $sformatf("long: table in a 10ms/100ms bank (cluster %0d)", cur_map[0].cluster));
    long_pass();
    n_hit = 0; n_acc = 0;
    repeat (3) long_pass();
    $display("long: hit rate on later passes %0d/%0d", n_hit, n_acc);
    check(n_hit * 100 >= n_acc * 95, $sformatf("long: later passes hit (%0d/%0d)", n_hit, n_acc));
    // program "short"
    tune();
    @(posedge clk);
    while (!tuned) short_burst();
    show("short-lived writes");
    check(ret_samples == 4, "short: four retention samples");
    check(cur_map[0].cluster == 0, $sformatf("short: buffer in a 100us bank (cluster %0d)", cur_map[0].cluster));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (15_000_000) @(posedge clk);
    failures++;
    $display("watchdog: phase %0d", tune_phase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
