// tb_retention_tuner: Algorithm 2 with bank statistics arranged so that each
// virtual bank has a known order of preference among the clusters (the
// testbench gives a bank more misses, fills = 1000 * rank, the worse the
// cluster is for the virtual bank it serves in the current tuning set).
// Test A, the paper's example of four virtual banks: preferred clusters
// 0, 3, 1, 3 must give VBank0 -> Cluster0, VBank1 -> Cluster3 bank 0,
// VBank2 -> Cluster1, VBank3 -> Cluster3 bank 1, as in the architecture
// figure. It also checks the tuning-set mappings against Table 1.
// Test B, 32 virtual banks that all prefer 10ms, then 100ms, 100us, 1ms:
// only eight fit in each cluster, so VBank0-7 -> Cluster2, 8-15 -> Cluster3,
// 16-23 -> Cluster0, 24-31 -> Cluster1, banks 0..7 in order.
module tb_retention_tuner;
  import halls_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, sample_req, sample_done = 0, done;
  logic [2:0] size_lg;
  vmap_t samp_map, final_map;
  logic [N_BANKS-1:0][31:0] hits, writes, fills;
  logic [31:0] cycles;
  int checks = 0, failures = 0;
  int rank [N_BANKS][4];
  int nsets;

  retention_tuner dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    sample_done <= 0;
    if (sample_req && !sample_done) begin
      // Table 1: in set t VBank v sits in cluster (v+t) mod 4
      for (int v = 0; v < 4; v++)
        check(samp_map[v].cluster == 2'((v + nsets) % 4), $sformatf("set %0d VBank%0d cluster %0d", nsets, v, samp_map[v].cluster));
      for (int v = 0; v < (1 << size_lg); v++) begin
        int p;
        p = samp_map[v].cluster * 8 + samp_map[v].bank;
        hits[p]   = 1000;
        writes[p] = 500;
        fills[p]  = 1000 * rank[v][samp_map[v].cluster];
      end
      cycles <= 100000;
      nsets++;
      repeat (2) @(posedge clk);
      sample_done <= 1;
    end
  end

  task automatic run(int sl);
    size_lg = 3'(sl);
    nsets = 0;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0; @(posedge clk);
    while (!done) @(posedge clk);
    check(nsets == 4, $sformatf("four tuning sets, got %0d", nsets));
  endtask

  function automatic void prefer(int v, int c0, int c1, int c2, int c3);
    rank[v][c0] = 0; rank[v][c1] = 1; rank[v][c2] = 2; rank[v][c3] = 3;
  endfunction

  initial begin
    hits = '0; writes = '0; fills = '0; cycles = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    prefer(0, 0, 1, 2, 3);
    prefer(1, 3, 2, 1, 0);
    prefer(2, 1, 0, 2, 3);
    prefer(3, 3, 2, 0, 1);
    run(2);
    check(final_map[0] == pbank_t'{cluster: 0, bank: 0}, "A VBank0");
    check(final_map[1] == pbank_t'{cluster: 3, bank: 0}, "A VBank1");
    check(final_map[2] == pbank_t'{cluster: 1, bank: 0}, "A VBank2");
    check(final_map[3] == pbank_t'{cluster: 3, bank: 1}, "A VBank3");
    for (int v = 0; v < N_BANKS; v++) prefer(v, 2, 3, 0, 1);
    run(5);
    for (int v = 0; v < N_BANKS; v++) begin
      int ec;
      ec = v < 8 ? 2 : v < 16 ? 3 : v < 24 ? 0 : 1;
      check(final_map[v] == pbank_t'{cluster: 2'(ec), bank: 3'(v % 8)}, $sformatf("B VBank%0d -> %p", v, final_map[v]));
    end
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
