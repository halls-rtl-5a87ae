// tb_vbank_map_table: reset state (1MB/64B/16-way on the configuration-tuning
// mapping, all banks powered), loading the paper's 128KB 2-way example
// mapping, the resulting bank power enables (4 banks on, 28 shut down) and the
// reverse physical-to-virtual mapping; a load without the pulse is ignored.
module tb_vbank_map_table;
  import halls_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  cfg_t cfg_in, cfg;
  vmap_t vmap_in, vmap;
  logic [N_BANKS-1:0][PB_W-1:0] p2v;
  logic [N_BANKS-1:0] pwr_en;
  int checks = 0, failures = 0;

  vbank_map_table dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    cfg_in = '{size_lg: 2, line_lg: 2, way_lg: 1};
    vmap_in = cfg_tuning_map();
    vmap_in[0] = '{cluster: 0, bank: 0};
    vmap_in[1] = '{cluster: 3, bank: 0};
    vmap_in[2] = '{cluster: 1, bank: 0};
    vmap_in[3] = '{cluster: 3, bank: 1};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(cfg == CFG_MAX && pwr_en == '1, "reset: 1MB, all banks on");
    check(vmap[0] == pbank_t'{cluster: 2, bank: 0} && vmap[8] == pbank_t'{cluster: 3, bank: 0}, "reset mapping starts in the 10ms cluster");
    check(p2v[16] == 0 && p2v[24] == 8 && p2v[0] == 16, "reverse mapping at reset");
    repeat (3) @(posedge clk);
    check(cfg == CFG_MAX, "no load without pulse");
    load <= 1; @(posedge clk); load <= 0; @(posedge clk);
    check(cfg == cfg_in && vmap[1] == vmap_in[1] && vmap[3] == vmap_in[3], "loaded");
    check(pwr_en == (32'b1 | 32'b1 << 24 | 32'b1 << 8 | 32'b1 << 25), "only 4 banks powered");
    check(p2v[24] == 1 && p2v[25] == 3 && p2v[8] == 2 && p2v[0] == 0, "reverse mapping");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
