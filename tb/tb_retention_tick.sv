// tb_retention_tick: checks that the retention-counter clock pulses for one
// cycle exactly every PERIOD cycles (here PERIOD = 37).
module tb_retention_tick;
  localparam int P = 37;
  logic clk = 0, rst_n = 0, tick;
  int checks = 0, failures = 0;
  int last = -1, n = 0, cyc = 0;

  retention_tick #(.PERIOD(P)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (tick) begin
      n++;
      if (last >= 0) begin
        checks++;
        if (cyc - last != P) begin failures++; $display("FAIL: gap %0d", cyc - last); end
      end
      last = cyc;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (P * 10 + 3) @(posedge clk);
    checks++;
    if (n != 10) begin failures++; $display("FAIL: %0d ticks in %0d cycles", n, P * 10 + 3); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
