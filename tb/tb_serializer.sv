// tb_serializer: self-checking test of the 30-bit word serializer.
//
// Loads random words, some back to back (load in the clock busy falls), and
// rebuilds each word from `dout` in the W clocks after the load. Checks the
// word, that exactly one bit leaves per clock (busy for W clocks, i.e.
// 160 Mbit/s at a 160 MHz clock) and that dout is low when idle.
module tb_serializer;
  import lfm_pkg::*;
  localparam int W = WORD_W;

  logic clk = 0, rst_n = 0, load = 0, dout, busy;
  logic [W-1:0] din;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  serializer #(.W(W)) dut (.clk, .rst_n, .load, .din, .dout, .busy);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] w, got;
    int nbusy;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    chk(!busy && !dout, "idle after reset");
    for (int k = 0; k < 20; k++) begin
      w = W'({$urandom, $urandom});
      din = w; load = 1; @(negedge clk); load = 0; din = '0;
      got = '0; nbusy = 0;
      for (int i = 0; i < W; i++) begin
        if (busy) nbusy++;
        got = {got[W-2:0], dout};
        if (i < W - 1) @(negedge clk);
      end
      chk(got == w, $sformatf("word %0d", k));
      chk(nbusy == W, "one bit per clock");
      @(negedge clk);
      chk(!busy, "busy ends after W bits");
      if (k % 2) begin repeat (3) @(negedge clk); chk(!dout, "dout low when idle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
