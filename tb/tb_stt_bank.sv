// tb_stt_bank: self-checking test of one STT-RAM bank.
// Checks: write then lookup of a line (hit, data, tag compare, valid check),
// a non-head row of a multi-row line, hit latency (2 cycles) and write
// latency (W_LAT cycles), per-block retention counter eviction after exactly
// 15 ticks for a clean line, expiry request and acknowledge for a dirty line,
// counter restart by a new write, and a shut-down bank refusing operations.
module tb_stt_bank;
  import halls_pkg::*;
  localparam int WL = 4;
  logic clk = 0, rst_n = 0, pwr_en = 1, tick = 0, sel = 0, exp_ack = 0;
  bank_op_t op;
  logic ready, done, exp_req, exp_clean;
  int n_clean = 0;
  bank_rsp_t rsp;
  logic [ROW_W-1:0] exp_row;
  int checks = 0, failures = 0;

  stt_bank #(.W_LAT(WL)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) n_clean += exp_clean;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // issue one op, return the cycles until done
  task automatic do_op(bank_op_t o, output int lat);
    while (!ready) @(posedge clk);
    op <= o; sel <= 1;
    @(posedge clk);
    sel <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!done);
  endtask

  function automatic bank_op_t wr(int row, int mrow, int tag, bit meta, bit dirty, logic [127:0] d);
    bank_op_t o = '0;
    o.data_we = 1; o.meta_we = meta; o.row = ROW_W'(row); o.mrow = ROW_W'(mrow);
    o.tag = TAG_W'(tag); o.m_valid = 1; o.m_dirty = dirty; o.wdata = d;
    return o;
  endfunction
  function automatic bank_op_t lk(int row, int mrow, int tag);
    bank_op_t o = '0;
    o.lookup = 1; o.row = ROW_W'(row); o.mrow = ROW_W'(mrow); o.tag = TAG_W'(tag);
    return o;
  endfunction

  task automatic do_tick();
    @(posedge clk); tick <= 1; @(posedge clk); tick <= 0;
    repeat (BANK_ROWS + 20) @(posedge clk);   // sweep of all rows
  endtask

  initial begin
    int lat;
    op = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    do_op(wr(8, 8, 'h123, 1, 0, 128'hA5A5), lat);
    check(lat == WL, $sformatf("write latency %0d", lat));
    do_op(wr(9, 8, 'h123, 0, 0, 128'hBEEF), lat);
    do_op(lk(8, 8, 'h123), lat);
    check(lat == HIT_LAT, $sformatf("hit latency %0d", lat));
    check(rsp.hit && rsp.valid && !rsp.dirty && rsp.rdata == 128'hA5A5, "read hit row 8");
    do_op(lk(9, 8, 'h123), lat);
    check(rsp.hit && rsp.rdata == 128'hBEEF, "read hit non-head row 9");
    do_op(lk(8, 8, 'h124), lat);
    check(!rsp.hit && rsp.valid && rsp.tag == 'h123, "tag mismatch is a miss");
    do_op(lk(40, 40, 'h0), lat);
    check(!rsp.hit && !rsp.valid, "empty row invalid");
    // retention: row 16 dirty, row 24 clean rewritten after 10 ticks
    do_op(wr(16, 16, 'h55, 1, 1, 128'h16), lat);
    do_op(wr(24, 24, 'h66, 1, 0, 128'h24), lat);
    repeat (10) do_tick();
    do_op(wr(24, 24, 'h66, 1, 0, 128'h25), lat);
    repeat (4) do_tick();
    do_op(lk(8, 8, 'h123), lat);
    check(rsp.hit, "clean line still valid after 14 ticks");
    check(!exp_req, "no expiry request after 14 ticks");
    check(n_clean == 0, "no clean expiry after 14 ticks");
    do_tick();
    do_op(lk(8, 8, 'h123), lat);
    check(!rsp.valid, "clean line evicted at 15th tick");
    check(n_clean == 1, $sformatf("one clean expiry event (%0d)", n_clean));
    check(exp_req && exp_row == 16, $sformatf("dirty line expiry request row %0d", exp_row));
    do_op(lk(16, 16, 'h55), lat);
    check(rsp.hit && rsp.dirty && rsp.rdata == 128'h16, "expiring dirty line still readable");
    @(posedge clk); exp_ack <= 1; @(posedge clk); exp_ack <= 0;
    @(posedge clk);
    check(!exp_req, "expiry request dropped after ack");
    do_op(lk(16, 16, 'h55), lat);
    check(!rsp.valid, "dirty line invalid after ack");
    do_op(lk(24, 24, 'h66), lat);
    check(rsp.hit && rsp.rdata == 128'h25, "rewritten line survives (counter restarted)");
    pwr_en <= 0;
    @(posedge clk); @(posedge clk);
    check(!ready, "shut-down bank not ready");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
