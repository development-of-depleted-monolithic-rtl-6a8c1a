// serial_config: configuration master (FPGA side) that loads the chip's
// configuration shift register.
//
// After `start` it takes bytes from a valid/ready stream and shifts them out
// MSB first on `cfg_si`, one bit per clock with `cfg_shift` high, until LEN
// bits have been sent (surplus bits of the last byte are dropped); it then
// pulses `cfg_ld` once so the chip copies the new setting into its shadow
// register. `busy` is high from start to the load pulse.
//
// Timing: one bit per clock; a new byte is accepted in the clock after the
// previous one is used up, so 9 clocks per byte.
// Follows the paper: serial configuration from the FPGA. Own choices: the
// stream interface and the load pulse.
module serial_config
  import lfm_pkg::*;
#(
  parameter int unsigned LEN = GLOB_CFG_W + N_COLS * N_ROWS * PIX_CFG_W
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       byte_valid,
  input  logic [7:0] byte_data,
  output logic       byte_ready,
  output logic       busy,
  output logic       cfg_si,
  output logic       cfg_shift,
  output logic       cfg_ld
);

  localparam int unsigned RW = $clog2(LEN + 1);

  logic [RW-1:0] rem;     // bits still to send
  logic [7:0]    bsr;     // current byte
  logic [3:0]    nbits;   // bits left in bsr
  logic          ld_pend;

  assign byte_ready = busy && (rem != 0) && (nbits == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      rem       <= '0;
      bsr       <= '0;
      nbits     <= '0;
      ld_pend   <= 1'b0;
      cfg_si    <= 1'b0;
      cfg_shift <= 1'b0;
      cfg_ld    <= 1'b0;
    end else begin
      cfg_shift <= 1'b0;
      cfg_ld    <= 1'b0;
      if (ld_pend) begin
        ld_pend <= 1'b0;
        cfg_ld  <= 1'b1;
        busy    <= 1'b0;
      end else if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          rem   <= RW'(LEN);
          nbits <= '0;
        end
      end else if (nbits == 0) begin
        if (byte_valid) begin
          bsr   <= byte_data;
          nbits <= 4'd8;
        end
      end else begin
        cfg_si    <= bsr[7];
        cfg_shift <= 1'b1;
        bsr       <= bsr << 1;
        rem       <= rem - 1'b1;
        if (rem == 1) begin
          nbits   <= '0;
          ld_pend <= 1'b1;
        end else nbits <= nbits - 1'b1;
      end
    end
  end

endmodule
