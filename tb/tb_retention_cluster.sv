// tb_retention_cluster: one cluster of eight banks. Writes a line into two
// banks at once through the bank select, checks the cluster's write latency,
// reads both back with different tags per bank, checks that only selected
// banks answer, and that the cluster's own tick clock evicts a clean line
// after 15 periods and raises the expiry request of a dirty one.
module tb_retention_cluster;
  import halls_pkg::*;
  localparam int WL = 6, TP = 3000;
  logic clk = 0, rst_n = 0;
  logic [7:0] pwr_en = '1, sel = '0, ready, done, exp_req, exp_ack = '0, exp_clean;
  bank_op_t op;
  bank_rsp_t [7:0] rsp;
  logic [7:0][ROW_W-1:0] exp_row;
  int checks = 0, failures = 0;

  retention_cluster #(.W_LAT(WL), .TICK_PERIOD(TP)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic do_op(logic [7:0] s, bank_op_t o, output int lat);
    while ((ready & s) != s) @(posedge clk);
    op <= o; sel <= s;
    @(posedge clk);
    sel <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while ((done & s) != s);
  endtask

  initial begin
    int lat;
    bank_op_t o;
    op = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    o = '0; o.data_we = 1; o.meta_we = 1; o.m_valid = 1; o.m_dirty = 0;
    o.row = 100; o.mrow = 100; o.tag = 'h3; o.wdata = 128'h77;
    do_op(8'b0000_0101, o, lat);
    check(lat == WL, $sformatf("cluster write latency %0d", lat));
    o.m_dirty = 1; o.row = 104; o.mrow = 104; o.tag = 'h9; o.wdata = 128'h99;
    do_op(8'b0000_0100, o, lat);
    o = '0; o.lookup = 1; o.row = 100; o.mrow = 100; o.tag = 'h3;
    do_op(8'b0000_0111, o, lat);
    check(rsp[0].hit && rsp[2].hit && rsp[0].rdata == 128'h77, "both selected banks hit");
    check(!rsp[1].hit && !rsp[1].valid, "bank 1 never written");
    check(rsp[3].valid == 0 && rsp[3].hit == 0, "unselected bank holds reset response");
    // 14 periods: still valid; 15: evicted
    repeat (14 * TP - 200) @(posedge clk);
    do_op(8'b0000_0001, o, lat);
    check(rsp[0].hit, "line valid before 15 ticks");
    repeat (2 * TP) @(posedge clk);
    do_op(8'b0000_0101, o, lat);
    check(!rsp[0].valid && !rsp[2].valid, "line evicted after 15 ticks");
    check(exp_req == 8'b0000_0100 && exp_row[2] == 104, "dirty line of bank 2 requests write-back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
