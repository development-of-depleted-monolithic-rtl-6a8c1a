// tb_pixel_column: self-checking test of a full 129-pixel column.
//
// In each of several rounds the bench gives a random set of pixels a hit with
// random leading and trailing time stamps, raises freeze and pulses read until
// the column token falls. It checks that the pixels come out in row order
// (row 0 first), each exactly once, with the expected {row, LE, TE}, that only
// one pixel drives the bus at a time and that the number of reads equals the
// number of hits. Disabled pixels must never be read.
module tb_pixel_column;
  import lfm_pkg::*;

  localparam int ROWS = N_ROWS;

  logic clk = 0, rst_n = 0;
  logic [ROWS-1:0] en, hit, read_int;
  logic [TS_W-1:0] ts;
  logic freeze, read, token;
  pix_data_t data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pixel_column #(.ROWS(ROWS)) dut (.clk, .rst_n, .en, .hit, .ts, .freeze, .read,
    .token, .read_int, .data);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [TS_W-1:0] exp_le [ROWS], exp_te [ROWS];
  logic            has    [ROWS];

  initial begin
    int nhit, nread, last_row;
    pix_data_t seen;
    logic got;
    hit = '0; freeze = 0; read = 0; ts = '0;
    for (int r = 0; r < ROWS; r++) en[r] = (r % 17) != 5;   // a few masked pixels
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    for (int round = 0; round < 6; round++) begin
      nhit = 0;
      for (int r = 0; r < ROWS; r++) has[r] = 0;
      // LE for all chosen pixels at one stamp, TE at an individual later stamp
      ts = 8'(round * 40 + 3);
      for (int r = 0; r < ROWS; r++)
        if (($urandom % 5) == 0) begin
          hit[r] = 1; has[r] = en[r]; exp_le[r] = ts;
          exp_te[r] = ts + 8'(1 + $urandom % 20);
          if (en[r]) nhit++;
        end
      @(negedge clk);
      for (int k = 1; k <= 21; k++) begin
        ts = ts + 1;
        for (int r = 0; r < ROWS; r++) if (hit[r] && exp_te[r] == ts) hit[r] = 0;
        @(negedge clk);
      end
      repeat (3) @(negedge clk);
      chk(token == (nhit != 0), "column token");
      freeze = 1; @(negedge clk);
      nread = 0; last_row = -1;
      while (token && nread < ROWS + 2) begin
        read = 1; got = 0; seen = '0;
        repeat (3) begin
          @(negedge clk);
          if ($countones(read_int) > 1) chk(0, "two pixels on the bus");
          if (read_int != 0) begin got = 1; seen = data; end
        end
        read = 0; @(negedge clk); @(negedge clk);
        chk(got, "a pixel answered");
        chk(int'(seen.row) > last_row, "row order");
        chk(has[seen.row] && seen.le == exp_le[seen.row] && seen.te == exp_te[seen.row],
            $sformatf("data of row %0d", seen.row));
        has[seen.row] = 0;
        last_row = int'(seen.row);
        nread++;
      end
      chk(nread == nhit, $sformatf("reads %0d hits %0d", nread, nhit));
      freeze = 0; @(negedge clk);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
