// tb_pixel_ro_logic: self-checking test of the pixel readout cell.
//
// Two cells are chained (cell A, row 3, has priority over cell B, row 7).
// The bench drives the time stamp, the comparator outputs, freeze and read on
// the falling clock edge and checks: a disabled cell ignores hits; LE and TE
// memories capture the time stamps at the two edges; the token appears only
// after the trailing edge and is held back while freeze is high; a stored cell
// ignores a second hit; read selects the higher-priority cell first, the data
// bus carries {row, LE, TE} only while read_int is high, and a read cell
// clears itself when read falls, handing over to the next cell.
module tb_pixel_ro_logic;
  import lfm_pkg::*;

  logic clk = 0, rst_n = 0;
  logic en_a, en_b, hit_a, hit_b, freeze, read;
  logic [TS_W-1:0] ts;
  logic tok_ab, tok_out, ri_a, ri_b;
  pix_data_t d_a, d_b, bus;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pixel_ro_logic #(.ROW(8'd3)) u_a (.clk, .rst_n, .en(en_a), .hit(hit_a), .ts, .freeze, .read,
    .token_in(1'b0), .token_out(tok_ab), .read_int(ri_a), .data(d_a));
  pixel_ro_logic #(.ROW(8'd7)) u_b (.clk, .rst_n, .en(en_b), .hit(hit_b), .ts, .freeze, .read,
    .token_in(tok_ab), .token_out(tok_out), .read_int(ri_b), .data(d_b));
  assign bus = d_a | d_b;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic step(input int n = 1);
    repeat (n) @(negedge clk);
  endtask

  // one read pulse of `len` clocks; returns the bus value seen while read_int high
  task automatic do_read(input int len, output pix_data_t seen, output logic a, output logic b);
    seen = '0; a = 0; b = 0;
    read = 1;
    for (int i = 0; i < len; i++) begin
      step();
      if (ri_a) a = 1;
      if (ri_b) b = 1;
      if (ri_a || ri_b) seen = bus;
    end
    read = 0;
    step(2);
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pix_data_t seen;
    logic ra, rb;
    en_a = 0; en_b = 0; hit_a = 0; hit_b = 0; freeze = 0; read = 0; ts = 8'h00;
    step(3); rst_n = 1; step(2);

    // disabled cell ignores a hit
    hit_a = 1; ts = 8'h11; step(3); hit_a = 0; step(4);
    chk(tok_out == 0, "disabled pixel raised token");

    en_a = 1; en_b = 1;
    // hit in A: LE at 0x21, TE at 0x35
    ts = 8'h21; hit_a = 1; step();
    ts = 8'h2a; step(3);
    chk(tok_out == 0, "token before trailing edge");
    ts = 8'h35; hit_a = 0; step();
    ts = 8'h36; step(2);
    chk(tok_ab == 1 && tok_out == 1, "token after trailing edge");
    chk(bus == '0, "bus driven without read");

    // second hit in A is ignored while A holds data
    ts = 8'h50; hit_a = 1; step(2); ts = 8'h51; hit_a = 0; step(2);

    // freeze: hit in B completes but must not join the token chain
    freeze = 1; step();
    ts = 8'h60; hit_b = 1; step(2); ts = 8'h63; hit_b = 0; step(4);
    chk(u_b.token_out == 1, "B sees A token");
    // read under freeze: A first
    do_read(4, seen, ra, rb);
    chk(ra && !rb, "A selected first");
    chk(seen == pix_data_t'{row: 8'd3, le: 8'h21, te: 8'h35}, "A data");
    chk(tok_out == 0, "chain empty while B is frozen out");
    freeze = 0; step(3);
    chk(tok_out == 1 && tok_ab == 0, "B joins after freeze released");
    freeze = 1; step();
    do_read(4, seen, ra, rb);
    chk(!ra && rb, "B selected");
    chk(seen == pix_data_t'{row: 8'd7, le: 8'h60, te: 8'h63}, "B data");
    chk(tok_out == 0, "all clear");
    freeze = 0;

    // both hit, then read twice: priority A then B
    ts = 8'h70; hit_a = 1; hit_b = 1; step();
    ts = 8'h71; hit_b = 0; step();
    ts = 8'h74; hit_a = 0; step(3);
    freeze = 1; step();
    do_read(3, seen, ra, rb);
    chk(ra && !rb && seen == pix_data_t'{row: 8'd3, le: 8'h70, te: 8'h74}, "priority read 1");
    chk(tok_out == 1, "B still holds token");
    do_read(3, seen, ra, rb);
    chk(!ra && rb && seen == pix_data_t'{row: 8'd7, le: 8'h70, te: 8'h71}, "priority read 2");
    chk(tok_out == 0, "all read");
    // a read with no token reads nothing
    do_read(3, seen, ra, rb);
    chk(!ra && !rb && seen == '0, "empty read");
    freeze = 0; step(2);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
