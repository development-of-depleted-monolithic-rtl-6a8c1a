// tb_data_receiver: self-checking test of the hit-word receiver.
//
// The bench sends random 30-bit hit words MSB first, one clock after a start
// strobe, and checks the received word, its decoded column and row, the binary
// time of arrival and the ToT (including words whose trailing edge wrapped
// past 255), and that valid comes exactly LATENCY + 30 clocks after start.
module tb_data_receiver;
  import lfm_pkg::*;
  localparam int W = WORD_W;

  logic clk = 0, rst_n = 0, start = 0, sin = 0, valid;
  hit_word_t word;
  logic [COL_W-1:0] col;
  logic [ROW_W-1:0] row;
  logic [TS_W-1:0] toa, tot;
  int checks = 0, failures = 0, wraps = 0;

  always #5 clk = ~clk;

  data_receiver #(.W(W), .LATENCY(1)) dut (.clk, .rst_n, .start, .sin, .valid, .word, .col, .row, .toa, .tot);

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
    hit_word_t w;
    logic [7:0] le_b, te_b, t;
    int lat;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int k = 0; k < 30; k++) begin
      le_b = 8'($urandom); t = 8'(1 + $urandom % 60);
      te_b = le_b + t;
      if (te_b < le_b) wraps++;
      w.col = COL_W'($urandom % 36); w.pix.row = 8'($urandom % 129);
      w.pix.le = le_b ^ (le_b >> 1); w.pix.te = te_b ^ (te_b >> 1);
      start = 1; @(negedge clk); start = 0;
      lat = 1;
      for (int i = W - 1; i >= 0; i--) begin
        sin = w[i]; @(negedge clk); lat++;
        if (i > 0) chk(!valid, "no early valid");
      end
      sin = 0;
      chk(valid && lat == W + 1, "valid at LATENCY + W");
      chk(word == w && col == w.col && row == w.pix.row, $sformatf("word %0d", k));
      chk(toa == le_b && tot == t, $sformatf("toa/tot %0d", k));
      @(negedge clk);
    end
    chk(wraps > 0, "time stamp wrap exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
