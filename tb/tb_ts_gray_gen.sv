// tb_ts_gray_gen: self-checking test of the Gray time stamp generator.
//
// Strobes ts_en once every 4 clocks (40 MHz stamps from a 160 MHz clock) for
// more than a full 256-count period and checks that the output changes only
// in the clock after a strobe, changes by exactly one bit each time, and equals
// the Gray code of the number of strobes seen (modulo 256).
module tb_ts_gray_gen;
  logic clk = 0, rst_n = 0, ts_en = 0;
  logic [7:0] g, g_prev;
  int checks = 0, failures = 0, strobes = 0;

  always #5 clk = ~clk;

  ts_gray_gen #(.W(8)) dut (.clk, .rst_n, .ts_en, .ts_gray(g));

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] b;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    chk(g == 0, "reset value");
    for (int i = 0; i < 300 * 4; i++) begin
      g_prev = g;
      ts_en = (i % 4) == 3;
      @(negedge clk);
      if (ts_en) begin
        strobes++;
        b = 8'(strobes);
        chk(g == (b ^ (b >> 1)), $sformatf("gray value %0d", strobes));
        chk($countones(g ^ g_prev) == 1, "one bit changes");
      end else chk(g == g_prev, "stable without strobe");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
