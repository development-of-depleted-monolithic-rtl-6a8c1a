// lfm_system: the chip together with its off-chip readout and configuration
// logic, i.e. the complete column-drain readout chain from comparator outputs
// to decoded hits.
//
// Blocks: lf_monopix (pixel matrix, end-of-column chain, configuration
// register, serializer), ro_controller (freeze/read/load sequencing),
// data_receiver (deframing and decoding) and serial_config (configuration
// loading). A divider makes the time stamp strobe `ts_en` once every TS_DIV
// clocks: with the 160 MHz bit clock and TS_DIV = 4 this is the 40 MHz time
// stamp clock (25 ns bins). The comparator outputs `hit` are inputs, and the
// trim-DAC, injection and global DAC settings are outputs, because the analog
// front end is not part of this RTL; `dout` is the serial stream that the LVDS
// driver would send.
module lfm_system
  import lfm_pkg::*;
#(
  parameter int unsigned COLS   = N_COLS,
  parameter int unsigned ROWS   = N_ROWS,
  parameter int unsigned TS_DIV = 4
) (
  input  logic                          clk,        // 160 MHz bit clock
  input  logic                          rst_n,
  input  logic [COLS-1:0][ROWS-1:0]     hit,
  // configuration stream
  input  logic                          cfg_start,
  input  logic                          cfg_valid,
  input  logic [7:0]                    cfg_byte,
  output logic                          cfg_ready,
  output logic                          cfg_busy,
  output logic                          cfg_so,
  output pix_cfg_t [COLS-1:0][ROWS-1:0] pix_cfg,
  output glob_cfg_t                     glob_cfg,
  // readout
  input  logic                          ro_enable,
  output logic                          dout,
  output logic                          token,
  output logic                          freeze,
  output logic                          read,
  output logic                          hit_valid,
  output hit_word_t                     hit_word,
  output logic [COL_W-1:0]              hit_col,
  output logic [ROW_W-1:0]              hit_row,
  output logic [TS_W-1:0]               hit_toa,
  output logic [TS_W-1:0]               hit_tot,
  output logic [31:0]                   n_reads,
  output logic [31:0]                   n_scans
);

  localparam int unsigned CFG_LEN = GLOB_CFG_W + COLS * ROWS * PIX_CFG_W;

  logic                        ts_en, load, rx_start;
  logic                        cfg_si, cfg_shift, cfg_ld;
  localparam int unsigned DW = (TS_DIV > 1) ? $clog2(TS_DIV) : 1;
  localparam logic [DW-1:0] DIV_LAST = DW'(TS_DIV - 1);

  logic [DW-1:0] div;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               div <= '0;
    else if (div == DIV_LAST) div <= '0;
    else                      div <= div + 1'b1;
  end
  assign ts_en = (div == DIV_LAST);

  serial_config #(.LEN(CFG_LEN)) u_cfg_master (
    .clk, .rst_n, .start(cfg_start), .byte_valid(cfg_valid), .byte_data(cfg_byte),
    .byte_ready(cfg_ready), .busy(cfg_busy), .cfg_si, .cfg_shift, .cfg_ld
  );

  lf_monopix #(.COLS(COLS), .ROWS(ROWS)) u_chip (
    .clk, .rst_n, .ts_en, .hit,
    .cfg_si, .cfg_shift, .cfg_ld, .cfg_so, .pix_cfg, .glob_cfg,
    .freeze, .read, .load, .token_out(token), .dout
  );

  ro_controller u_ctrl (
    .clk, .rst_n, .enable(ro_enable), .token, .freeze, .read, .load, .rx_start,
    .n_reads, .n_scans
  );

  data_receiver u_rx (
    .clk, .rst_n, .start(rx_start), .sin(dout), .valid(hit_valid), .word(hit_word),
    .col(hit_col), .row(hit_row), .toa(hit_toa), .tot(hit_tot)
  );

endmodule
