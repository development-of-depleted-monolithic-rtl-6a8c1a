// lf_monopix: digital part of the monolithic pixel chip.
//
// The pixel matrix (COLS x ROWS readout cells), one end-of-column block per
// column, the configuration register and the output serializer. The analog
// parts are outside this module: the comparator outputs arrive on `hit`, and
// the configuration outputs that would drive the in-pixel trim DACs, the
// injection switches and the global DACs leave on `pix_cfg`/`glob_cfg`. The
// serial output `dout` would drive the LVDS pad.
//
// Readout (column drain): a stored hit raises its column token and, through
// the end-of-column chain, the chip token `token_out`. The off-chip readout
// controller then raises `freeze` (no further hits join the scan), and for each
// hit pulses `read`; the end-of-column chain routes the pulse to the first
// column with a token, where the first pixel with a token drives its data.
// The controller strobes `load` while the word is valid and the serializer
// sends it. The pixel clears when `read` falls. The controller repeats until
// `token_out` falls, then drops `freeze`.
//
// Own choices: a single clock (the 160 MHz bit clock) with `ts_en` marking the
// 40 MHz time stamp clock, and a `load` line from the controller.
module lf_monopix
  import lfm_pkg::*;
#(
  parameter int unsigned COLS = N_COLS,
  parameter int unsigned ROWS = N_ROWS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          ts_en,      // 40 MHz time stamp clock strobe
  input  logic [COLS-1:0][ROWS-1:0]     hit,        // comparator outputs
  // configuration port
  input  logic                          cfg_si,
  input  logic                          cfg_shift,
  input  logic                          cfg_ld,
  output logic                          cfg_so,
  output pix_cfg_t [COLS-1:0][ROWS-1:0] pix_cfg,
  output glob_cfg_t                     glob_cfg,
  // readout port
  input  logic                          freeze,
  input  logic                          read,
  input  logic                          load,
  output logic                          token_out,
  output logic                          dout
);

  logic [COLS-1:0][ROWS-1:0] en;
  logic [COLS-1:0][TS_W-1:0] ts;
  logic [COLS-1:0]           col_read, col_token;
  pix_data_t [COLS-1:0]      col_data;
  logic [COLS:0]             tok_chain;
  hit_word_t [COLS:0]        word_chain;
  logic                      ser_busy;

  config_reg #(.COLS(COLS), .ROWS(ROWS)) u_cfg (
    .clk, .rst_n, .si(cfg_si), .shift(cfg_shift), .ld(cfg_ld), .so(cfg_so),
    .pix_cfg, .glob_cfg
  );

  always_comb begin
    for (int c = 0; c < int'(COLS); c++)
      for (int r = 0; r < int'(ROWS); r++)
        en[c][r] = pix_cfg[c][r].en;
  end

  pixel_matrix #(.COLS(COLS), .ROWS(ROWS)) u_matrix (
    .clk, .rst_n, .en, .hit, .ts, .freeze, .read(col_read),
    .token(col_token), .data(col_data)
  );

  assign tok_chain[0]  = 1'b0;
  assign word_chain[0] = '0;

  for (genvar c = 0; c < COLS; c++) begin : g_eoc
    eoc #(.COL(COL_W'(c))) u_eoc (
      .clk, .rst_n, .ts_en, .ts(ts[c]),
      .col_token(col_token[c]), .col_data(col_data[c]), .col_read(col_read[c]),
      .read, .tok_in(tok_chain[c]), .tok_out(tok_chain[c+1]),
      .data_in(word_chain[c]), .data_out(word_chain[c+1])
    );
  end

  assign token_out = tok_chain[COLS];

  serializer #(.W(WORD_W)) u_ser (
    .clk, .rst_n, .load, .din(word_chain[COLS]), .dout, .busy(ser_busy)
  );

  // The arbitration must never read two columns at once.
  a_one_column: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(col_read));

endmodule
