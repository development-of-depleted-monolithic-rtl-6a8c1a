// ts_gray_gen: time stamp generator of an end-of-column block.
//
// A binary counter advances once per period of the bunch-crossing clock
// (40 MHz by default), signalled here by the one-cycle strobe `ts_en` in the
// system clock domain, and its value is distributed up the column in Gray
// code, so that a pixel sampling it while it changes can be off by at most one
// count. With 8 bits the stamp wraps every 256 periods (6.4 us at 40 MHz).
//
// Timing: the registered output changes in the clock after each `ts_en`.
// Follows the paper: 8-bit Gray-coded time stamp from an external clock.
// Own choice: reset to zero, strobe-based clocking.
module ts_gray_gen
  import lfm_pkg::*;
#(
  parameter int unsigned W = TS_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         ts_en,
  output logic [W-1:0] ts_gray
);

  logic [W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      ts_gray <= '0;
    end else if (ts_en) begin
      cnt     <= cnt + 1'b1;
      ts_gray <= (cnt + 1'b1) ^ ((cnt + 1'b1) >> 1);
    end
  end

endmodule
