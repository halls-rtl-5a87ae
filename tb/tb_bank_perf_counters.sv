// tb_bank_perf_counters: random event streams into the per-bank counters,
// compared with counts kept by the testbench; counting only while enabled,
// clearing, and the interval cycle counter.
module tb_bank_perf_counters;
  import halls_pkg::*;
  localparam int CW = 16;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [N_BANKS-1:0] ev_hit = '0, ev_write = '0, ev_fill = '0;
  logic [N_BANKS-1:0][CW-1:0] hits, writes, fills;
  logic [CW-1:0] cycles;
  int checks = 0, failures = 0;
  int eh [N_BANKS], ew [N_BANKS], ef [N_BANKS], ec;

  bank_perf_counters #(.CW(CW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < N_BANKS; b++) begin eh[b] = 0; ew[b] = 0; ef[b] = 0; end
    ec = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      en = (i % 7) != 3;
      ev_hit = {$urandom, $urandom} >> 32; ev_write = $urandom; ev_fill = $urandom & $urandom;
      if (en) begin
        ec++;
        for (int b = 0; b < N_BANKS; b++) begin
          eh[b] += ev_hit[b]; ew[b] += ev_write[b]; ef[b] += ev_fill[b];
        end
      end
    end
    @(negedge clk); en = 0;
    for (int b = 0; b < N_BANKS; b++)
      check(hits[b] == CW'(eh[b]) && writes[b] == CW'(ew[b]) && fills[b] == CW'(ef[b]),
            $sformatf("bank %0d: %0d/%0d %0d/%0d %0d/%0d", b, hits[b], eh[b], writes[b], ew[b], fills[b], ef[b]));
    check(cycles == CW'(ec), $sformatf("cycles %0d vs %0d", cycles, ec));
    clr = 1; @(negedge clk); clr = 0;
    check(hits == '0 && writes == '0 && fills == '0 && cycles == '0, "clear");
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
