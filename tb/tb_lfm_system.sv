// tb_lfm_system: end-to-end test of the complete readout chain at full size
// (36 x 129 pixels, 160 MHz clock, 40 MHz time stamps).
//
// 1. Configuration: a full 27880-bit setting is streamed in through the
//    configuration master (a few pixels masked, trim codes and injection bits
//    varied, two global codes) and every pixel's configuration output and the
//    global codes are compared with what was sent.
// 2. Pile-up: with the readout disabled, one pixel is hit twice; only the
//    first hit may come out.
// 3. Random hits with the readout running: many pixels in many columns are hit
//    at staggered times with random widths, some long enough for the 8-bit
//    time stamp to wrap between leading and trailing edge, and some hits fall
//    on masked pixels. The expected words (column, row, time of arrival, ToT)
//    are computed from the clock count alone: the time stamp counts one every
//    four clocks from reset.
// Every received word must match exactly one expected hit and every expected
// hit must be received. Consecutive words of one scan must be 34 clocks apart
// (4 clocks of read plus 30 bits at one bit per clock). The bench counts how
// often each mechanism occurred (freeze scans, scans with several hits, scans
// spanning several columns, hits completed during a freeze and read in a later
// scan, masked hits, pile-up, time stamp wrap) and fails any that never did.
module tb_lfm_system;
  import lfm_pkg::*;

  localparam int COLS = N_COLS, ROWS = N_ROWS;
  localparam int LEN  = GLOB_CFG_W + COLS * ROWS * PIX_CFG_W;
  localparam int NEV  = 80;

  logic clk = 0, rst_n = 0;
  logic [COLS-1:0][ROWS-1:0] hit;
  logic cfg_start = 0, cfg_valid = 0, cfg_ready, cfg_busy, cfg_so;
  logic [7:0] cfg_byte = '0;
  pix_cfg_t [COLS-1:0][ROWS-1:0] pix_cfg;
  glob_cfg_t glob_cfg;
  logic ro_enable = 0, dout, token, freeze, read, hit_valid;
  hit_word_t hit_word;
  logic [COL_W-1:0] hit_col;
  logic [ROW_W-1:0] hit_row;
  logic [TS_W-1:0] hit_toa, hit_tot;
  logic [31:0] n_reads, n_scans;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lfm_system dut (.clk, .rst_n, .hit, .cfg_start, .cfg_valid, .cfg_byte, .cfg_ready, .cfg_busy,
    .cfg_so, .pix_cfg, .glob_cfg, .ro_enable, .dout, .token, .freeze, .read, .hit_valid,
    .hit_word, .hit_col, .hit_row, .hit_toa, .hit_tot, .n_reads, .n_scans);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- reference
  int k = 0;                       // clock edges since reset release
  always @(posedge clk) if (rst_n) k++;

  function automatic logic [7:0] stamp(input int edges);   // binary stamp
    return 8'(edges / 4);
  endfunction

  typedef struct {int col, row, t_rise, t_fall; bit expect_out; bit seen;} ev_t;
  ev_t ev [$];

  function automatic bit masked(input int c, input int r);
    return ((c * 7 + r) % 53) == 0;
  endfunction

  // received words
  typedef struct {hit_word_t w; logic [7:0] toa, tot; int scan, t;} rx_t;
  rx_t rx [$];
  always @(posedge clk) if (rst_n && hit_valid)
    rx.push_back('{w: hit_word, toa: hit_toa, tot: hit_tot, scan: int'(n_scans), t: k});

  // hits whose trailing edge falls while freeze is high
  int n_frozen_out = 0;

  initial begin
    logic [LEN-1:0] vec;
    pix_cfg_t pc;
    int nev, c, r, t0, errs, n_masked, n_wrap, n_multi, n_multicol, n_late, n_pileup;
    logic [7:0] exp_toa, exp_tot;
    bit found;

    hit = '0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    // ---- 1. configuration
    for (int cc = 0; cc < COLS; cc++)
      for (int rr = 0; rr < ROWS; rr++) begin
        pc.tdac = 4'((cc + 3 * rr) % 16); pc.inj_en = (rr % 32) == 0; pc.en = !masked(cc, rr);
        vec[(cc * ROWS + rr) * PIX_CFG_W +: PIX_CFG_W] = pc;
      end
    vec[LEN-1 -: GLOB_CFG_W] = {8'h9C, 8'h41};
    cfg_start = 1; @(negedge clk); cfg_start = 0;
    for (int b = 0; b < LEN / 8; b++) begin
      cfg_byte = vec[LEN - 1 - 8 * b -: 8]; cfg_valid = 1;
      do @(posedge clk); while (!cfg_ready);
      @(negedge clk);
    end
    cfg_valid = 0;
    while (cfg_busy) @(negedge clk);
    @(negedge clk);
    errs = 0;
    for (int cc = 0; cc < COLS; cc++)
      for (int rr = 0; rr < ROWS; rr++)
        if (pix_cfg[cc][rr] != pix_cfg_t'(vec[(cc * ROWS + rr) * PIX_CFG_W +: PIX_CFG_W])) errs++;
    chk(errs == 0, $sformatf("%0d pixel configurations wrong", errs));
    chk(glob_cfg.th_dac == 8'h9C && glob_cfg.inj_dac == 8'h41, "global codes");

    // ---- 2. pile-up with the readout off
    c = 10; r = 20;
    t0 = k;
    hit[c][r] = 1; repeat (12) @(negedge clk); hit[c][r] = 0;
    ev.push_back('{col: c, row: r, t_rise: t0, t_fall: t0 + 12, expect_out: 1, seen: 0});
    repeat (9) @(negedge clk);
    hit[c][r] = 1; repeat (20) @(negedge clk); hit[c][r] = 0;
    n_pileup = 1;
    repeat (8) @(negedge clk);
    chk(token, "token from stored hit");
    chk(rx.size() == 0 && !freeze, "readout disabled");
    ro_enable = 1;

    // ---- 3. random hits with the readout running
    begin
      int start [NEV], width [NEV], pc_ [NEV], pr_ [NEV];
      bit used [COLS][ROWS];
      foreach (used[a, b2]) used[a][b2] = 0;
      used[10][20] = 1;
      for (int i = 0; i < NEV; i++) begin
        do begin
          pc_[i] = $urandom % COLS;
          pr_[i] = (i % 10 == 3) ? ((53 - (pc_[i] * 7) % 53) % 53) : $urandom % ROWS;   // some on masked pixels
        end while (pr_[i] >= ROWS || used[pc_[i]][pr_[i]]);
        used[pc_[i]][pr_[i]] = 1;
        start[i] = k + 2 + (i / 4) * 90 + $urandom % 60;
        width[i] = (i % 13 == 5) ? 900 + $urandom % 300 : 2 + $urandom % 120;
      end
      for (int cyc = 0; cyc < (NEV / 4) * 90 + 1600; cyc++) begin
        for (int i = 0; i < NEV; i++) begin
          if (k == start[i]) hit[pc_[i]][pr_[i]] = 1;
          if (k == start[i] + width[i]) begin
            hit[pc_[i]][pr_[i]] = 0;
            if (freeze) n_frozen_out++;
            ev.push_back('{col: pc_[i], row: pr_[i], t_rise: start[i], t_fall: start[i] + width[i],
                           expect_out: !masked(pc_[i], pr_[i]), seen: 0});
          end
        end
        @(negedge clk);
      end
    end
    repeat (400) @(negedge clk);
    chk(!token && !freeze, "readout drained");

    // ---- matching
    n_masked = 0; n_wrap = 0; n_late = 0;
    foreach (rx[i]) begin
      found = 0;
      foreach (ev[j]) if (!ev[j].seen && ev[j].expect_out &&
                          int'(rx[i].w.col) == ev[j].col && int'(rx[i].w.pix.row) == ev[j].row) begin
        exp_toa = stamp(ev[j].t_rise);
        exp_tot = stamp(ev[j].t_fall) - stamp(ev[j].t_rise);
        chk(rx[i].toa == exp_toa && rx[i].tot == exp_tot,
            $sformatf("col %0d row %0d toa %0d/%0d tot %0d/%0d", ev[j].col, ev[j].row,
                      rx[i].toa, exp_toa, rx[i].tot, exp_tot));
        if (stamp(ev[j].t_fall) < stamp(ev[j].t_rise)) n_wrap++;
        ev[j].seen = 1; found = 1;
        break;
      end
      chk(found, $sformatf("unexpected word col %0d row %0d", rx[i].w.col, rx[i].w.pix.row));
    end
    foreach (ev[j]) begin
      if (!ev[j].expect_out) n_masked++;
      else chk(ev[j].seen, $sformatf("hit col %0d row %0d lost", ev[j].col, ev[j].row));
    end
    chk(int'(n_reads) == rx.size(), "controller read count");

    // per-scan statistics and word spacing
    n_multi = 0; n_multicol = 0;
    for (int s = 1; s <= int'(n_scans); s++) begin
      int cnt, firstcol; bit multicol;
      cnt = 0; multicol = 0; firstcol = -1;
      foreach (rx[i]) if (rx[i].scan == s) begin
        if (cnt > 0) chk(rx[i].t - rx[i-1].t == 34, "34 clocks between words of a scan");
        if (firstcol < 0) firstcol = int'(rx[i].w.col);
        else if (int'(rx[i].w.col) != firstcol) multicol = 1;
        if (cnt > 0) chk({rx[i].w.col, rx[i].w.pix.row} > {rx[i-1].w.col, rx[i-1].w.pix.row},
                         "priority order inside a scan");
        cnt++;
      end
      if (cnt > 1) n_multi++;
      if (multicol) n_multicol++;
    end
    // hits completed during a freeze come out in a later scan
    n_late = n_frozen_out;

    $display("mechanisms: scans=%0d multi-hit scans=%0d multi-column scans=%0d frozen-out hits=%0d masked hits=%0d pile-ups=%0d stamp wraps=%0d words=%0d",
             n_scans, n_multi, n_multicol, n_late, n_masked, n_pileup, n_wrap, rx.size());
    chk(n_scans > 0,    "freeze/read scan happened");
    chk(n_multi > 0,    "scan with several hits happened");
    chk(n_multicol > 0, "column arbitration within a scan happened");
    chk(n_late > 0,     "hit held back by freeze happened");
    chk(n_masked > 0,   "masked pixel hit happened");
    chk(n_pileup > 0,   "pile-up happened");
    chk(n_wrap > 0,     "time stamp wrap happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
