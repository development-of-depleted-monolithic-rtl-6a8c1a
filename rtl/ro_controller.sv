// ro_controller: readout controller (runs off-chip, in the FPGA of the test
// system) that drives the column-drain readout of the chip.
//
// While the chip token is low the controller idles. When the token rises it
// raises `freeze`, so no further hit joins the scan, waits FREEZE_WAIT clocks
// and then reads one hit after the other: `read` is held high for READ_LEN
// clocks, `load` is strobed in the last of them (the pixel data have then
// reached the serializer input), `read` falls (the pixel clears itself) and the
// controller waits WORD_LEN clocks for the serializer to send the word. If the
// token is still high it reads again, otherwise it drops `freeze` and returns
// to idle. `rx_start` tells the data receiver where a word begins.
//
// Timing at the defaults: 4 + 30 = 34 clocks per hit, i.e. 4.7 Mhit/s at
// 160 MHz; FREEZE_WAIT + 1 clocks of overhead per scan.
// Follows the paper: freeze then read per hit, repeated while the token is
// high (readout waveforms). Own choices: all cycle counts and the load strobe.
module ro_controller
  import lfm_pkg::*;
#(
  parameter int unsigned READ_LEN    = 4,       // clocks read is high (>= 3)
  parameter int unsigned WORD_LEN    = WORD_W,  // clocks to send one word
  parameter int unsigned FREEZE_WAIT = 2        // clocks from freeze to first read
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        token,      // chip token
  output logic        freeze,
  output logic        read,
  output logic        load,       // serializer load strobe
  output logic        rx_start,   // first bit of a word follows in the next clock
  output logic [31:0] n_reads,    // words read since reset
  output logic [31:0] n_scans     // freeze periods since reset
);

  typedef enum logic [2:0] {S_IDLE, S_FREEZE, S_READ, S_WAIT, S_RELEASE} state_t;

  localparam int unsigned CW = $clog2(WORD_LEN + READ_LEN + FREEZE_WAIT + 2);

  state_t        state;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      n_reads <= '0;
      n_scans <= '0;
    end else begin
      case (state)
        S_IDLE:
          if (enable && token) begin
            state   <= S_FREEZE;
            cnt     <= CW'(FREEZE_WAIT);
            n_scans <= n_scans + 1;
          end
        S_FREEZE:
          if (cnt != 0) cnt <= cnt - 1'b1;
          else if (token) begin
            state <= S_READ;
            cnt   <= CW'(READ_LEN - 1);
          end else state <= S_RELEASE;
        S_READ:
          if (cnt != 0) cnt <= cnt - 1'b1;
          else begin
            state   <= S_WAIT;
            cnt     <= CW'(WORD_LEN - 1);
            n_reads <= n_reads + 1;
          end
        S_WAIT:
          if (cnt != 0) cnt <= cnt - 1'b1;
          else if (token) begin
            state <= S_READ;
            cnt   <= CW'(READ_LEN - 1);
          end else state <= S_RELEASE;
        default: state <= S_IDLE;   // S_RELEASE
      endcase
    end
  end

  always_comb begin
    freeze   = (state != S_IDLE);
    read     = (state == S_READ);
    load     = (state == S_READ) && (cnt == 0);
    rx_start = load;
  end

endmodule
