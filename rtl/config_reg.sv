// config_reg: chip configuration register.
//
// A single serial shift register with a parallel shadow register. While
// `shift` is high, `si` enters at bit 0 and the register moves towards the MSB;
// `so` is the MSB, for read-back. A `ld` strobe copies the shift register into
// the shadow register, whose outputs drive the chip. Layout of the LEN-bit
// vector (MSB sent first): the global block (threshold DAC code, injection DAC
// code) in the top GLOB_CFG_W bits, then one PIX_CFG_W-bit field per pixel,
// pixel p = col*ROWS + row at bits [p*PIX_CFG_W +: PIX_CFG_W], each field being
// {tdac[3:0], inj_en, en}. After reset every pixel is disabled and all codes
// are zero.
//
// Follows the paper: configuration registers, 4-bit in-pixel trim DAC code,
// global threshold, injection. Own choices: a single chain, its layout, the
// enable and injection bits per pixel, 8-bit global codes and reset values.
module config_reg
  import lfm_pkg::*;
#(
  parameter int unsigned COLS = N_COLS,
  parameter int unsigned ROWS = N_ROWS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          si,
  input  logic                          shift,
  input  logic                          ld,
  output logic                          so,
  output pix_cfg_t [COLS-1:0][ROWS-1:0] pix_cfg,
  output glob_cfg_t                     glob_cfg
);

  localparam int unsigned NPIX = COLS * ROWS;
  localparam int unsigned LEN  = GLOB_CFG_W + NPIX * PIX_CFG_W;

  logic [LEN-1:0] sr, shadow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr     <= '0;
      shadow <= '0;
    end else begin
      if (shift) sr <= {sr[LEN-2:0], si};
      if (ld)    shadow <= sr;
    end
  end

  assign so       = sr[LEN-1];
  assign glob_cfg = glob_cfg_t'(shadow[LEN-1 -: GLOB_CFG_W]);
  assign pix_cfg  = shadow[NPIX*PIX_CFG_W-1:0];

endmodule
