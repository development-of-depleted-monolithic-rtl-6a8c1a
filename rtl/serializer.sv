// serializer: parallel-to-serial converter for the hit words, one bit per
// clock; at the nominal 160 MHz clock this is the chip's 160 Mbit/s output
// stream that drives the LVDS output pad.
//
// A `load` strobe copies the word into a shift register; the word then leaves
// MSB first, bit i in clock i+1 after the load, W clocks in total. `busy` is
// high while bits are being sent, `dout` is low when idle.
// Follows the paper: serialisation at 160 Mbit/s. Own choices: word length,
// bit order and an externally driven load strobe.
module serializer
  import lfm_pkg::*;
#(
  parameter int unsigned W = WORD_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] din,
  output logic         dout,
  output logic         busy
);

  logic [W-1:0]         sr;
  logic [$clog2(W+1)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr  <= '0;
      cnt <= '0;
    end else if (load) begin
      sr  <= din;
      cnt <= ($clog2(W+1))'(W);
    end else if (cnt != 0) begin
      sr  <= sr << 1;
      cnt <= cnt - 1'b1;
    end
  end

  always_comb begin
    busy = (cnt != 0);
    dout = busy & sr[W-1];
  end

  // A new word must not be loaded while the previous one is being sent.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy);

endmodule
