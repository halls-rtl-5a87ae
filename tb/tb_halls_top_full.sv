// tb_halls_top_full: the whole cache at its default sizes and timing (1MB,
// 32 banks, retention-counter periods of 12.5K/125K/1.25M/12.5M cycles,
// 10M-instruction tuning interval), taken through complete cache
// operations on the reset layout (1MB, 64B lines, 16 ways, virtual banks
// 0..7 in the 10ms cluster, 8..15 in 100ms, 16..23 in 100us, 24..31 in 1ms).
// Checked: read miss with fill from memory (four 16B rows per 64B line),
// read hit after it with the 6-cycle latency, write hit, and retention
// expiry in the 100us cluster after 15 ticks (200K cycles): address 0x8000
// is set 512, the first set of the second set group, whose way 0 is virtual
// bank 16; written dirty it must be written back by the expiry path and
// then miss with the written data; read clean next to it (0x8040) it must
// expire without a write-back. A line in virtual bank 0 (10ms cluster)
// must still hit after the same time. The tuner is not started: one
// tuning interval alone is 10M instructions.
module tb_halls_top_full;
  import halls_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cpu_req_valid = 0, cpu_req_ready, cpu_req_we = 0;
  logic [ADDR_W-1:0] cpu_req_addr = '0;
  logic [DATA_W-1:0] cpu_req_wdata = '0, cpu_rsp_rdata;
  logic cpu_rsp_valid, cpu_rsp_hit;
  logic mem_req, mem_we, mem_ack;
  logic [ADDR_W-1:0] mem_addr;
  logic [DATA_W-1:0] mem_wdata, mem_rdata;
  logic tune_start = 0, tuned;
  logic [3:0] instr_inc = 4'd1;
  logic [1:0] tune_phase;
  cfg_t cur_cfg;
  vmap_t cur_map;
  logic [N_BANKS-1:0] bank_pwr_en, ev_expiry_clean;
  logic [3:0] cfg_samples, ret_samples;
  logic ev_miss, ev_writeback, ev_expiry_wb, reconf_done;

  int checks = 0, failures = 0;
  int n_exp_dirty = 0, n_exp_clean = 0, n_wb = 0;
  logic [DATA_W-1:0] refm [logic [ADDR_W-1:0]];

  halls_top dut (.*);
  mem_model #(.LAT(5)) u_mem (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    n_exp_dirty += ev_expiry_wb;
    n_exp_clean += $countones(ev_expiry_clean);
    n_wb        += ev_writeback;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [DATA_W-1:0] ref_rd(logic [ADDR_W-1:0] a);
    return refm.exists(a) ? refm[a] : u_mem.init_word(a);
  endfunction

  task automatic access(bit we, logic [ADDR_W-1:0] a, output int lat, output bit hit);
    logic [DATA_W-1:0] d;
    d = {$urandom, $urandom, $urandom, $urandom};
    cpu_req_valid <= 1; cpu_req_we <= we; cpu_req_addr <= a; cpu_req_wdata <= d;
    @(posedge clk);
    while (!cpu_req_ready) @(posedge clk);
    cpu_req_valid <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!cpu_rsp_valid);
    hit = cpu_rsp_hit;
    if (we) refm[a] = d;
    else check(cpu_rsp_rdata == ref_rd(a), $sformatf("read %h data", a));
  endtask

  initial begin
    int lat, r0; bit hit;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    check(cur_cfg == CFG_MAX && bank_pwr_en == '1, "reset layout: 1MB, all banks on");
    r0 = u_mem.n_reads;
    access(0, 32'h0000_0010, lat, hit);
    check(!hit, "first read misses");
    check(u_mem.n_reads - r0 == 4, $sformatf("64B line filled with %0d row reads", u_mem.n_reads - r0));
    access(0, 32'h0000_0030, lat, hit);
    check(hit && lat == HIT_LAT + 4, $sformatf("read hit in the filled line, latency %0d", lat));
    access(1, 32'h0000_0020, lat, hit);
    check(hit, "write hit");
    access(0, 32'h0000_0020, lat, hit);
    check(hit, "read back written row");
    access(1, 32'h0000_8000, lat, hit);
    check(!hit, "write miss at 0x8000");
    access(0, 32'h0000_8040, lat, hit);
    check(!hit, "read miss at 0x8040");
    check(n_exp_dirty == 0 && n_exp_clean == 0, "nothing expired yet");
    repeat (16 * 12_500 + 2_000) @(posedge clk);
    check(n_exp_dirty == 1, $sformatf("one dirty expiry (%0d)", n_exp_dirty));
    check(n_exp_clean == 1, $sformatf("one clean expiry (%0d)", n_exp_clean));
    access(0, 32'h0000_8000, lat, hit);
    check(!hit, "expired dirty line misses and returns the written data");
    access(0, 32'h0000_0020, lat, hit);
    check(hit, "line in the 10ms cluster still held");
    check(n_wb == 0, "no victim write-backs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
