// tb_pixel_matrix: self-checking test of the full 36 x 129 pixel matrix.
//
// Each column gets its own time stamp value. The bench hits a random set of
// pixels across the matrix, checks every column token, then reads each column
// on its own read line under a common freeze and checks that every hit comes
// back from the right column with the right row and that column's time stamps,
// and that reading one column leaves the others untouched.
module tb_pixel_matrix;
  import lfm_pkg::*;

  localparam int COLS = N_COLS, ROWS = N_ROWS;

  logic clk = 0, rst_n = 0;
  logic [COLS-1:0][ROWS-1:0] en, hit;
  logic [COLS-1:0][TS_W-1:0] ts;
  logic [COLS-1:0]           read, token;
  pix_data_t [COLS-1:0]      data;
  logic freeze;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pixel_matrix #(.COLS(COLS), .ROWS(ROWS)) dut (.clk, .rst_n, .en, .hit, .ts, .freeze,
    .read, .token, .data);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [COLS-1:0][ROWS-1:0] exp_hit;

  initial begin
    int n;
    pix_data_t seen;
    en = '1; hit = '0; read = '0; freeze = 0;
    for (int c = 0; c < COLS; c++) ts[c] = 8'(c * 5);
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    exp_hit = '0;
    for (int c = 0; c < COLS; c++)
      if (c % 3 != 1)
        for (int r = 0; r < ROWS; r++)
          if (($urandom % 40) == 0) exp_hit[c][r] = 1;
    hit = exp_hit; @(negedge clk);
    for (int c = 0; c < COLS; c++) ts[c] = ts[c] + 8'd3;
    hit = '0;
    repeat (4) @(negedge clk);
    for (int c = 0; c < COLS; c++)
      chk(token[c] == (exp_hit[c] != 0), $sformatf("token col %0d", c));
    freeze = 1; @(negedge clk);

    for (int c = COLS - 1; c >= 0; c--) begin
      n = 0;
      while (token[c] && n <= ROWS) begin
        read[c] = 1; seen = '0;
        repeat (3) begin @(negedge clk); if (data[c] != '0) seen = data[c]; end
        read[c] = 0; repeat (2) @(negedge clk);
        if (seen == '0) begin chk(0, $sformatf("col %0d gave no data", c)); break; end
        chk(exp_hit[c][seen.row] && seen.le == 8'(c * 5) && seen.te == 8'(c * 5 + 3),
            $sformatf("col %0d row %0d data", c, seen.row));
        exp_hit[c][seen.row] = 0;
        n++;
      end
      chk(exp_hit[c] == '0, $sformatf("col %0d fully read", c));
      // columns not yet read still hold their tokens
      for (int k = 0; k < c; k++)
        if (exp_hit[k] != 0) chk(token[k], $sformatf("col %0d kept token", k));
    end
    freeze = 0; @(negedge clk);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
