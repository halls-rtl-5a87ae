// tb_set_addr_decoder: checks the set address decoder against a reference
// written with divisions instead of shifts. First the paper's example
// (128KB, 2-way, 64B lines; VBank0 -> 100us cluster, VBank1 and VBank3 -> two
// banks of the 100ms cluster, VBank2 -> 1ms cluster), then random addresses
// on random legal configurations and mappings, including hit gathering.
module tb_set_addr_decoder;
  import halls_pkg::*;
  logic [ADDR_W-1:0] addr;
  cfg_t cfg;
  vmap_t vmap;
  logic [TAG_W-1:0] tag;
  logic [ADDR_W-1:0] set;
  logic [ROW_W-1:0] head_row, row;
  logic [MAX_WAYS-1:0] way_en;
  logic [MAX_WAYS-1:0][PB_W-1:0] way_vbank, way_pbank;
  logic [N_BANKS-1:0] bank_sel, bank_hit;
  logic hit;
  logic [3:0] hit_way;
  int checks = 0, failures = 0;

  set_addr_decoder dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic ref_check();
    longint size, line, ways, sets, lpb, blk, s, t, grp, hd, r, vb, pb;
    logic [N_BANKS-1:0] exp_sel;
    size = 32768 << cfg.size_lg; line = 16 << cfg.line_lg; ways = 1 << cfg.way_lg;
    sets = size / (ways * line); lpb = 32768 / line;
    blk = addr / line; s = blk % sets; t = blk / sets;
    grp = s / lpb; hd = (s % lpb) * (line / 16); r = hd + (addr % line) / 16;
    check(tag == TAG_W'(t) && set == ADDR_W'(s), $sformatf("tag/set %h: %h/%0d vs %h/%0d", addr, tag, set, t, s));
    check(head_row == ROW_W'(hd) && row == ROW_W'(r), $sformatf("rows %0d/%0d vs %0d/%0d", head_row, row, hd, r));
    exp_sel = '0;
    for (int w = 0; w < ways; w++) begin
      vb = grp * ways + w;
      pb = vmap[vb].cluster * 8 + vmap[vb].bank;
      exp_sel[pb] = 1;
      check(way_en[w] && way_vbank[w] == PB_W'(vb) && way_pbank[w] == PB_W'(pb), $sformatf("way %0d", w));
    end
    check(bank_sel == exp_sel, "bank select");
  endtask

  initial begin
    // paper example
    cfg = '{size_lg: 2, line_lg: 2, way_lg: 1};
    vmap = cfg_tuning_map();
    vmap[0] = '{cluster: 0, bank: 0};
    vmap[1] = '{cluster: 3, bank: 0};
    vmap[2] = '{cluster: 1, bank: 0};
    vmap[3] = '{cluster: 3, bank: 1};
    bank_hit = '0;
    addr = ((32'h5 * 1024) + 100) * 64 + 32;
    #1;
    check(set == 100 && tag == 5 && head_row == 400 && row == 402, "example set 100");
    check(bank_sel == (32'b1 << 0 | 32'b1 << 24), "set 0-511 -> Cluster0 and Cluster3 bank 0");
    addr = ((32'h5 * 1024) + 600) * 64;
    #1;
    check(bank_sel == (32'b1 << 8 | 32'b1 << 25), "set 512-1023 -> Cluster1 and Cluster3 bank 1");
    bank_hit = 32'b1 << 25;
    #1;
    check(hit && hit_way == 1, "hit in way 1 (VBank3)");
    bank_hit = 32'b1 << 9;  // not selected
    #1;
    check(!hit, "hit of unselected bank ignored");
    // random
    for (int i = 0; i < 400; i++) begin
      int sl, wl;
      sl = 2 + $urandom_range(0, 3);
      wl = $urandom_range(0, sl < 4 ? sl : 4);
      cfg = '{size_lg: 3'(sl), line_lg: 2'($urandom_range(0, 2)), way_lg: 3'(wl)};
      for (int v = 0; v < N_BANKS; v++) vmap[v] = pbank_t'((v * 7 + i) % 32);
      addr = $urandom;
      bank_hit = '0;
      #1;
      ref_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
