// data_receiver: receiver of the chip's serial hit stream (FPGA side).
//
// `start` marks that the first bit of a word is sampled LATENCY clocks later; the
// next W bits are shifted in MSB first and the word is presented with a
// one-clock `valid`. The receiver also decodes it: column, row, LE and TE
// converted from Gray code to binary, and ToT = TE - LE modulo 2^8, in units of
// the time stamp period (25 ns at 40 MHz).
//
// Timing: valid rises LATENCY + W clocks after start.
// Follows the paper: data receiver, Gray-coded LE/TE time stamps giving time
// of arrival and ToT. Own choices: framing by the controller's strobe and the
// decoded outputs.
module data_receiver
  import lfm_pkg::*;
#(
  parameter int unsigned W       = WORD_W,
  parameter int unsigned LATENCY = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            sin,
  output logic            valid,
  output hit_word_t       word,
  output logic [COL_W-1:0] col,
  output logic [ROW_W-1:0] row,
  output logic [TS_W-1:0]  toa,   // binary leading-edge time stamp
  output logic [TS_W-1:0]  tot    // time over threshold
);

  logic                   go;
  logic [W-1:0]           sr;
  logic [$clog2(W+1)-1:0] rem;

  // `go` marks the clock before the first bit is sampled: LATENCY-1 clocks
  // after `start`.
  if (LATENCY == 1) begin : g_nodelay
    assign go = start;
  end else begin : g_delay
    logic [LATENCY-2:0] start_d;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) start_d <= '0;
      else        start_d <= (LATENCY-1)'({start_d, start});
    end
    assign go = start_d[LATENCY-2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr    <= '0;
      rem   <= '0;
      valid <= 1'b0;
      word  <= '0;
    end else begin
      valid <= 1'b0;
      if (rem != 0) begin
        sr  <= {sr[W-2:0], sin};
        rem <= rem - 1'b1;
        if (rem == 1) begin
          valid <= 1'b1;
          word  <= hit_word_t'({sr[W-2:0], sin});
        end
      end
      if (go) rem <= ($clog2(W+1))'(W);
    end
  end

  always_comb begin
    col = word.col;
    row = word.pix.row;
    toa = gray2bin(word.pix.le);
    tot = gray2bin(word.pix.te) - gray2bin(word.pix.le);
  end

endmodule
