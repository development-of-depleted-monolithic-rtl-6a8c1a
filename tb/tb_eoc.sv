// tb_eoc: self-checking test of the end-of-column block.
//
// Three blocks are chained (column addresses 4, 5, 6). The bench plays the
// three pixel columns: each holds a number of pending hits, raises its token
// while any is left, answers its col_read with a known 24-bit word and drops
// one hit when its read ends. It checks the token chain, that each read pulse
// reaches only the first column with a token, that the chain output carries
// that column's address and data, and that each block's time stamp follows
// the strobes in Gray code.
module tb_eoc;
  import lfm_pkg::*;

  localparam int N = 3;

  logic clk = 0, rst_n = 0, ts_en = 0, read = 0;
  logic [N-1:0] col_token, col_read;
  logic [N:0]   tok;
  pix_data_t    col_data [N];
  hit_word_t    chain [N+1];
  logic [TS_W-1:0] ts [N];
  int pending [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  assign tok[0]   = 1'b0;
  assign chain[0] = '0;
  for (genvar i = 0; i < N; i++) begin : g
    eoc #(.COL(COL_W'(4 + i))) dut (.clk, .rst_n, .ts_en, .ts(ts[i]),
      .col_token(col_token[i]), .col_data(col_data[i]), .col_read(col_read[i]),
      .read, .tok_in(tok[i]), .tok_out(tok[i+1]), .data_in(chain[i]), .data_out(chain[i+1]));
    assign col_token[i] = pending[i] > 0;
    assign col_data[i]  = col_read[i] ? pix_data_t'{row: 8'(pending[i]), le: 8'(16 * i), te: 8'hA5} : '0;
  end

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
    int exp_col;
    hit_word_t seen;
    logic [N-1:0] reads_seen;
    pending[0] = 0; pending[1] = 2; pending[2] = 1;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    // time stamp: 5 strobes
    for (int i = 0; i < 5; i++) begin ts_en = 1; @(negedge clk); ts_en = 0; @(negedge clk); end
    for (int i = 0; i < N; i++) chk(ts[i] == 8'(5 ^ (5 >> 1)), "gray time stamp");
    chk(tok[N] == 1, "token out");
    pending[0] = 1;
    @(negedge clk);
    // expected order: column 4 (one hit), column 5 (two), column 6 (one)
    for (int k = 0; k < 4; k++) begin
      exp_col = (k == 0) ? 0 : (k < 3) ? 1 : 2;
      read = 1; reads_seen = '0; seen = '0;
      repeat (3) begin
        @(negedge clk);
        reads_seen |= col_read;
        if (col_read != 0) seen = chain[N];
      end
      read = 0;
      for (int i = 0; i < N; i++) if (reads_seen[i]) pending[i]--;
      @(negedge clk);
      chk(reads_seen == (N'(1) << exp_col), $sformatf("read %0d routed to column %0d", k, exp_col));
      chk(seen.col == COL_W'(4 + exp_col) && seen.pix.le == 8'(16 * exp_col) && seen.pix.te == 8'hA5,
          $sformatf("word %0d", k));
    end
    chk(tok[N] == 0, "all columns empty");
    read = 1; repeat (3) @(negedge clk);
    chk(col_read == 0 && chain[N] == '0, "read with no token");
    read = 0; @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
