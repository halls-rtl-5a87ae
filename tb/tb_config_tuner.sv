// tb_config_tuner: Algorithm 1 on three latency landscapes worked out by hand.
// Landscape A: latency = 1000 + 10|size_lg-3| + 5|line_lg-1| + 3|way_lg-1|.
//   Samples: 1MB/64B/16w 1034, 512KB 1024, 256KB/8w 1011, 128KB/4w 1018
//   (worse: size loop stops), 256KB/32B 1006, 16B 1011 (stop), 4w 1003,
//   2w 1000, 1w 1003 (stop): best 256KB/32B/2-way, 1000 cycles, 9 samples.
// Landscape B: the largest cache is fastest; every first halving is worse:
//   best 1MB/64B/16-way after 4 samples.
// Landscape C: every configuration has the same latency; a step must lower
//   the latency to be taken, so the first halving of each parameter stops
//   it: best 1MB/64B/16-way, 1500 cycles, 4 samples.
module tb_config_tuner;
  import halls_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, sample_req, sample_done = 0, done;
  cfg_t cur_cfg, best_cfg;
  logic [31:0] latency = 0, min_latency;
  logic [3:0] n_samples;
  int checks = 0, failures = 0;
  int landscape;

  config_tuner dut (.*);
  always #5 clk = ~clk;

  function automatic int absd(int a, int b); return a > b ? a - b : b - a; endfunction
  function automatic int lat_of(cfg_t c);
    if (landscape == 0)
      return 1000 + 10 * absd(c.size_lg, 3) + 5 * absd(c.line_lg, 1) + 3 * absd(c.way_lg, 1);
    if (landscape == 2) return 1500;
    return 2000 - 100 * c.size_lg - 10 * c.line_lg - c.way_lg;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // answers each sample request after a few cycles
  always @(posedge clk) begin
    sample_done <= 0;
    if (sample_req && !sample_done) begin
      check(cur_cfg.way_lg <= cur_cfg.size_lg, "ways never exceed banks");
      repeat (3) @(posedge clk);
      latency     <= lat_of(cur_cfg);
      sample_done <= 1;
    end
  end

  task automatic run(int l);
    landscape = l;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0; @(posedge clk);
    while (!done) @(posedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0);
    check(best_cfg == cfg_t'{size_lg: 3, line_lg: 1, way_lg: 1}, $sformatf("A best %p", best_cfg));
    check(min_latency == 1000, $sformatf("A min latency %0d", min_latency));
    check(n_samples == 9, $sformatf("A samples %0d", n_samples));
    run(1);
    check(best_cfg == CFG_MAX, $sformatf("B best %p", best_cfg));
    check(min_latency == 2000 - 500 - 20 - 4, "B min latency");
    check(n_samples == 4, $sformatf("B samples %0d", n_samples));
    run(2);
    check(best_cfg == CFG_MAX, $sformatf("C best %p", best_cfg));
    check(min_latency == 1500, "C min latency");
    check(n_samples == 4, $sformatf("C samples %0d", n_samples));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
