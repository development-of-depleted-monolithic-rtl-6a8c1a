// tb_lf_monopix: self-checking test of the chip's digital top, with the bench
// acting as the off-chip controller, at a reduced matrix of 4 x 12 pixels.
//
// The bench shifts in a configuration (every third pixel masked, trim codes
// equal to the row number), checks the configuration outputs, makes hits in
// several columns (one on a masked pixel), then runs the column-drain
// sequence by hand: freeze, and per hit a 4-clock read with load in the last
// clock, followed by 30 clocks in which it collects the serial word from
// `dout`. The words must arrive in priority order (column, then row) with the
// Gray time stamps the bench expects from its own count of time stamp
// strobes, and the token must fall after the last one.
module tb_lf_monopix;
  import lfm_pkg::*;

  localparam int COLS = 4, ROWS = 12;
  localparam int LEN = GLOB_CFG_W + COLS * ROWS * PIX_CFG_W;

  logic clk = 0, rst_n = 0, ts_en = 0;
  logic [COLS-1:0][ROWS-1:0] hit;
  logic cfg_si = 0, cfg_shift = 0, cfg_ld = 0, cfg_so;
  pix_cfg_t [COLS-1:0][ROWS-1:0] pix_cfg;
  glob_cfg_t glob_cfg;
  logic freeze = 0, read = 0, load = 0, token_out, dout;
  int checks = 0, failures = 0;
  int nstamp = 0;

  always #5 clk = ~clk;

  lf_monopix #(.COLS(COLS), .ROWS(ROWS)) dut (.clk, .rst_n, .ts_en, .hit, .cfg_si, .cfg_shift,
    .cfg_ld, .cfg_so, .pix_cfg, .glob_cfg, .freeze, .read, .load, .token_out, .dout);

  // time stamp strobe every 4 clocks, counted by the bench
  int div = 0;
  always @(negedge clk) if (rst_n) begin
    div = (div + 1) % 4;
    ts_en = (div == 0);
  end
  always @(posedge clk) if (ts_en) nstamp++;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  function automatic logic [7:0] g(input int n);
    logic [7:0] b = 8'(n);
    return b ^ (b >> 1);
  endfunction

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {int col, row; logic [7:0] le, te;} exp_t;

  initial begin
    logic [LEN-1:0] vec;
    pix_cfg_t pc;
    exp_t exp [$];
    hit_word_t w;
    int idx;
    logic [7:0] le_s;
    hit = '0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++) begin
        pc.tdac = 4'(r); pc.inj_en = (c == 1); pc.en = (r % 3) != 2;
        vec[(c * ROWS + r) * PIX_CFG_W +: PIX_CFG_W] = pc;
      end
    vec[LEN-1 -: 16] = 16'hB07E;
    cfg_shift = 1;
    for (int i = LEN - 1; i >= 0; i--) begin cfg_si = vec[i]; @(negedge clk); end
    cfg_shift = 0; cfg_ld = 1; @(negedge clk); cfg_ld = 0; @(negedge clk);
    chk(pix_cfg == vec[COLS*ROWS*PIX_CFG_W-1:0] && glob_cfg == 16'hB07E, "configuration outputs");

    // hits: (3,1) first, then (0,7), (0,4), (2,2 masked), (1,0)
    exp.push_back('{col: 3, row: 1, le: g(nstamp), te: 8'h00});
    hit[3][1] = 1; @(negedge clk);
    repeat (9) @(negedge clk);
    le_s = g(nstamp); hit[0][7] = 1; hit[0][4] = 1; hit[2][2] = 1; hit[1][0] = 1;
    @(negedge clk);
    repeat (14) @(negedge clk);
    exp[0].te = g(nstamp); hit[3][1] = 0;
    repeat (6) @(negedge clk);
    exp.push_front('{col: 1, row: 0, le: le_s, te: g(nstamp)});
    exp.push_front('{col: 0, row: 7, le: le_s, te: g(nstamp)});
    exp.push_front('{col: 0, row: 4, le: le_s, te: g(nstamp)});
    hit[0] = '0; hit[2] = '0; hit[1] = '0;
    repeat (4) @(negedge clk);
    chk(token_out, "chip token");

    freeze = 1; repeat (2) @(negedge clk);
    idx = 0;
    while (token_out && idx < 10) begin
      read = 1; repeat (3) @(negedge clk);
      load = 1; @(negedge clk); load = 0; read = 0;
      w = '0;
      for (int i = 0; i < WORD_W; i++) begin w = {w[WORD_W-2:0], dout}; @(negedge clk); end
      if (idx < exp.size())
        chk(int'(w.col) == exp[idx].col && int'(w.pix.row) == exp[idx].row &&
            w.pix.le == exp[idx].le && w.pix.te == exp[idx].te,
            $sformatf("word %0d: col %0d row %0d le %h te %h, expected le %h te %h", idx, w.col,
                      w.pix.row, w.pix.le, w.pix.te, exp[idx].le, exp[idx].te));
      idx++;
    end
    chk(idx == 4, $sformatf("%0d words read", idx));
    chk(!token_out, "token gone");
    freeze = 0; repeat (3) @(negedge clk);
    chk(!token_out, "masked pixel never raises the token");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
