// tb_edp_estimator: energy, delay and EDP of a bank for random counter values
// in each cluster, against the Table 2 numbers worked out in the testbench
// (write energy 392/404/419/438 pJ, per-bank hit energy 5794/16 pJ, leakage
// 2200.032 mW / 32 banks at 2GHz, write latency 3/4/6/7, hit latency 2,
// memory penalty 100 cycles).
module tb_edp_estimator;
  logic [1:0] cluster;
  logic [31:0] hits, writes, fills, cycles;
  logic [63:0] energy;
  logic [47:0] delay;
  logic [111:0] edp;
  int checks = 0, failures = 0;
  longint unsigned ewr [4] = '{392000, 404000, 419000, 438000};
  longint unsigned wl [4] = '{3, 4, 6, 7};

  edp_estimator dut (.*);

  initial begin
    longint unsigned e, d;
    logic [111:0] p;
    for (int i = 0; i < 200; i++) begin
      cluster = 2'(i);
      hits = $urandom_range(0, 1 << 20); writes = $urandom_range(0, 1 << 20);
      fills = $urandom_range(0, 1 << 16); cycles = $urandom_range(0, 1 << 24);
      #1;
      e = hits * 64'd362125 + writes * ewr[i % 4] + cycles * 64'd34376;
      d = hits * 2 + writes * wl[i % 4] + fills * 100;
      p = 112'(e) * 112'(d);
      checks++;
      if (energy != e || delay != 48'(d) || edp != p) begin
        failures++;
        $display("FAIL: cluster %0d e %0d/%0d d %0d/%0d", cluster, energy, e, delay, d);
      end
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
