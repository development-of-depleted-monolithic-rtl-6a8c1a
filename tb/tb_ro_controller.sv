// tb_ro_controller: self-checking test of the readout controller sequence.
//
// A simple chip model holds a count of stored hits: its token is high while
// the count is non-zero, each falling edge of read removes one hit, and hits
// that arrive while freeze is high are only added to the count when freeze
// falls. The bench checks that freeze rises before the first read, that read
// is high for READ_LEN clocks with load in the last one, that each hit costs
// READ_LEN + WORD_LEN clocks, that every stored hit is read, that freeze falls
// once the token is gone and that late hits are read in a second scan.
module tb_ro_controller;
  import lfm_pkg::*;

  logic clk = 0, rst_n = 0, enable = 0;
  logic freeze, read, load, rx_start, token;
  logic [31:0] n_reads, n_scans;
  int stored = 0, late = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ro_controller #(.READ_LEN(4), .WORD_LEN(30), .FREEZE_WAIT(2)) dut (.clk, .rst_n, .enable,
    .token, .freeze, .read, .load, .rx_start, .n_reads, .n_scans);

  assign token = stored > 0;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // chip model and protocol monitor
  logic read_q = 0, freeze_q = 0;
  int read_len = 0, last_rise = -1, cyc = 0, loads = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (read && !read_q) begin
      chk(freeze, "read only under freeze");
      if (last_rise >= 0) chk(cyc - last_rise == 34, "34 clocks per hit");
      last_rise = cyc; read_len = 0;
    end
    if (read) read_len++;
    if (load) begin loads++; chk(read && read_len == 4, "load in last read clock"); chk(rx_start, "rx_start with load"); end
    if (!read && read_q) begin chk(read_len == 4, "read length"); stored--; end
    if (!freeze && freeze_q) begin stored += late; late = 0; last_rise = -1; end
    read_q <= read; freeze_q <= freeze;
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    stored = 5; repeat (10) @(negedge clk);
    chk(!freeze && !read, "disabled controller idles");
    enable = 1;
    repeat (3) @(negedge clk);
    chk(freeze && !read, "freeze before read");
    repeat (40) @(negedge clk);
    late = 3;             // hits arriving during the scan
    wait (!freeze);
    chk(n_reads == 5, "first scan read five hits");
    repeat (3) @(negedge clk);
    wait (!freeze);
    repeat (5) @(negedge clk);
    chk(n_reads == 8 && loads == 8, "late hits read in a second scan");
    chk(n_scans == 2, "two scans");
    chk(!freeze && !read && stored == 0, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
