// tb_halls_ctrl: the cache controller with the four retention clusters, the
// mapping table and a behavioural main memory. Random reads and writes are
// compared with a reference copy of memory under four layouts: the reset
// layout (1MB, 64B, 16-way), the paper's example (128KB, 2-way, 64B with
// VBank0 -> 100us, VBank1/3 -> 100ms, VBank2 -> 1ms), 256KB direct-mapped
// with 16B lines, and 512KB 8-way 32B on a scrambled mapping. Switching
// layouts must write every dirty line back (memory compared with the
// reference afterwards). Also checked: read-hit latency (bank hit latency 2
// plus 4 controller cycles = 6), that a line left alone longer than its
// retention is written back by the expiry path and then misses, and that
// hits, misses and dirty write-backs all happen.
module tb_halls_ctrl;
  import halls_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cpu_req_valid = 0, cpu_req_ready, cpu_req_we = 0;
  logic [ADDR_W-1:0] cpu_req_addr = '0;
  logic [DATA_W-1:0] cpu_req_wdata = '0, cpu_rsp_rdata;
  logic cpu_rsp_valid, cpu_rsp_hit;
  logic mem_req, mem_we, mem_ack;
  logic [ADDR_W-1:0] mem_addr;
  logic [DATA_W-1:0] mem_wdata, mem_rdata;
  cfg_t cfg, cfg_in;
  vmap_t vmap, vmap_in;
  logic [N_BANKS-1:0][PB_W-1:0] p2v;
  logic [N_BANKS-1:0] pwr_en, bank_sel, bank_done, exp_req, exp_ack;
  logic reconf_req = 0, reconf_done;
  bank_op_t bank_op;
  bank_rsp_t [N_BANKS-1:0] bank_rsp;
  logic [N_BANKS-1:0][ROW_W-1:0] exp_row;
  logic [N_BANKS-1:0] ev_hit, ev_write, ev_fill;
  logic ev_miss, ev_writeback, ev_expiry_wb;
  localparam int unsigned TP [4] = '{3000, 5000, 8000, 20000};

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0, n_exp = 0;
  logic [DATA_W-1:0] refm [logic [ADDR_W-1:0]];

  halls_ctrl dut (.*);
  vbank_map_table u_map (.clk, .rst_n, .load(reconf_done), .cfg_in, .vmap_in, .cfg, .vmap, .p2v, .pwr_en);
  for (genvar c = 0; c < 4; c++) begin : g_cl
    retention_cluster #(.W_LAT(WLAT[c]), .TICK_PERIOD(TP[c])) u_cl (
      .clk, .rst_n, .pwr_en(pwr_en[c*8 +: 8]), .sel(bank_sel[c*8 +: 8]), .op(bank_op),
      .ready(), .done(bank_done[c*8 +: 8]), .rsp(bank_rsp[c*8 +: 8]),
      .exp_req(exp_req[c*8 +: 8]), .exp_row(exp_row[c*8 +: 8]), .exp_ack(exp_ack[c*8 +: 8]), .exp_clean());
  end
  mem_model #(.LAT(5)) u_mem (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    n_wb  += ev_writeback;
    n_exp += ev_expiry_wb;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [DATA_W-1:0] ref_rd(logic [ADDR_W-1:0] a);
    return refm.exists(a) ? refm[a] : u_mem.init_word(a);
  endfunction

  // one CPU access; returns latency and hit flag
  task automatic access(bit we, logic [ADDR_W-1:0] a, output int lat, output bit hit);
    logic [DATA_W-1:0] d;
    a[3:0] = 0;
    d = {$urandom, $urandom, $urandom, $urandom};
    cpu_req_valid <= 1; cpu_req_we <= we; cpu_req_addr <= a; cpu_req_wdata <= d;
    @(posedge clk);
    while (!cpu_req_ready) @(posedge clk);
    cpu_req_valid <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!cpu_rsp_valid);
    hit = cpu_rsp_hit;
    if (hit) n_hit++; else n_miss++;
    if (we) refm[a] = d;
    else check(cpu_rsp_rdata == ref_rd(a), $sformatf("read %h: %h vs %h", a, cpu_rsp_rdata, ref_rd(a)));
  endtask

  task automatic reconf(cfg_t c, vmap_t m);
    cfg_in = c; vmap_in = m;
    reconf_req <= 1;
    do @(posedge clk); while (!reconf_done);
    reconf_req <= 0;
    @(posedge clk); @(posedge clk);
    check(cfg == c, "layout loaded");
    foreach (refm[a]) check(u_mem.peek(a) == refm[a], $sformatf("memory %h after flush", a));
  endtask

  task automatic traffic(int n, int span_lg);
    int lat; bit hit;
    for (int i = 0; i < n; i++) begin
      logic [ADDR_W-1:0] a;
      // half the accesses go to a small hot region so that lines are reused
      if ($urandom_range(0, 1) == 0) a = ($urandom & 32'h1FFF) | 32'h0100_0000;
      else a = ($urandom & ((32'd1 << span_lg) - 1)) | 32'h0100_0000;
      access($urandom_range(0, 2) == 0, a, lat, hit);
    end
  endtask

  initial begin
    int lat; bit hit;
    vmap_t m;
    cfg_in = CFG_MAX; vmap_in = cfg_tuning_map();
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // layout 1: reset layout
    traffic(1500, 22);
    access(0, 32'h0100_0040, lat, hit);
    access(0, 32'h0100_0040, lat, hit);
    check(hit && lat == HIT_LAT + 4, $sformatf("read hit latency %0d", lat));
    // layout 2: paper example
    m = cfg_tuning_map();
    m[0] = '{cluster: 0, bank: 0}; m[1] = '{cluster: 3, bank: 0};
    m[2] = '{cluster: 1, bank: 0}; m[3] = '{cluster: 3, bank: 1};
    reconf('{size_lg: 2, line_lg: 2, way_lg: 1}, m);
    check(pwr_en == (32'b1 | 32'b1 << 24 | 32'b1 << 8 | 32'b1 << 25), "four banks on");
    traffic(1500, 19);
    // two dirty lines in set 5 (VBank0/1); leave it alone past 15 ticks of the
    // 100us cluster; it must be written back and then miss
    access(1, 32'h0200_0000 + 5 * 64, lat, hit);
    access(1, 32'h0300_0000 + 5 * 64, lat, hit);   // other way of set 5
    begin
      int e0;
      e0 = n_exp;
      repeat (16 * TP[0]) @(posedge clk);
      check(n_exp > e0, "expired dirty line written back");
    end
    // way 0 of set 5 is in the 100us cluster, way 1 in the 100ms cluster:
    // exactly the line held by way 0 has expired
    begin
      bit h0, h1;
      access(0, 32'h0200_0000 + 5 * 64, lat, h0);
      access(0, 32'h0300_0000 + 5 * 64, lat, h1);
      check(h0 != h1, "only the line in the 100us bank expired");
    end
    // layout 3 and 4
    reconf('{size_lg: 3, line_lg: 0, way_lg: 0}, cfg_tuning_map());
    traffic(1500, 20);
    for (int v = 0; v < N_BANKS; v++) m[v] = pbank_t'((v * 13 + 5) % 32);
    reconf('{size_lg: 4, line_lg: 1, way_lg: 3}, m);
    traffic(1500, 21);
    reconf(CFG_MAX, cfg_tuning_map());
    check(n_hit > 500 && n_miss > 500, $sformatf("hits %0d misses %0d", n_hit, n_miss));
    check(n_wb > 50, $sformatf("dirty write-backs %0d", n_wb));
    $display("hits %0d misses %0d writebacks %0d expiry write-backs %0d", n_hit, n_miss, n_wb, n_exp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
