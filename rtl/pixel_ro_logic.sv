// pixel_ro_logic: digital readout cell of one pixel in the column-drain
// architecture.
//
// The cell watches the discriminated front-end output `hit`. On its rising
// edge the current Gray time stamp is written into the LE memory, on its
// falling edge into the TE memory, so the pair gives time of arrival and time
// over threshold (ToT). A completed hit sets the "hit stored" flag; while the
// column-wide `freeze` is low this flag sets the token flag, which joins the
// column token chain (token_out = token_in | token). The cell ignores new hits
// until it has been read, i.e. it stores one hit.
//
// Readout: on the rising edge of the column `read` line the cell latches
// whether it is the highest-priority cell holding a token (its own token set
// and no token arriving from above). That latched flag gated with `read` is
// `read_int`; while it is high the cell drives {row address, LE, TE} on the
// shared 24-bit data bus (all other cells drive zero, the column ORs them).
// When `read` falls, a selected cell clears its memories and flags, so its
// token drops and the next cell down the chain becomes the one read.
//
// Timing (one clock domain): `hit` is sampled every clock; LE/TE are written in
// the clock after the edge is seen. read rises at cycle t -> read_int high from
// t+1 -> cell cleared in the clock after read falls.
//
// Follows the paper: edge detector with EN, LE and TE RAMs written from the
// 8-bit time stamp, address ROM, two set/reset latches with a freeze switch
// between them, token in/out chain, read selection with a load flop, ReadInt,
// 24-bit data bus. Own choices: a synchronous implementation of these latches,
// the exact gating, which latch the freeze acts on, and the bus field order.
module pixel_ro_logic
  import lfm_pkg::*;
#(
  parameter logic [ROW_W-1:0] ROW = '0   // contents of the address ROM
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,         // pixel enable (configuration)
  input  logic            hit,        // comparator output
  input  logic [TS_W-1:0] ts,         // Gray time stamp, column-wide
  input  logic            freeze,     // column-wide: stop new tokens
  input  logic            read,       // column-wide read strobe
  input  logic            token_in,   // token from higher-priority pixels
  output logic            token_out,  // token towards lower-priority pixels
  output logic            read_int,   // this pixel is being read
  output pix_data_t       data        // bus contribution (zero unless read_int)
);

  logic            hit_q, read_q;
  logic            le_flag;   // LE stored, waiting for the trailing edge
  logic            hit_flag;  // complete hit stored (first latch)
  logic            token;     // pixel takes part in the token scan (second latch)
  logic            sel;       // latched at read rising edge
  logic [TS_W-1:0] le_ram, te_ram;

  logic hit_i, le_edge, te_edge, accept, read_rise, read_fall, clr;

  always_comb begin
    hit_i     = hit & en;
    le_edge   = hit_i & ~hit_q;
    te_edge   = ~hit_i & hit_q;
    accept    = ~le_flag & ~hit_flag;      // edge detector enable
    read_rise = read & ~read_q;
    read_fall = ~read & read_q;
    clr       = read_fall & sel;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_q    <= 1'b0;
      read_q   <= 1'b0;
      le_flag  <= 1'b0;
      hit_flag <= 1'b0;
      token    <= 1'b0;
      sel      <= 1'b0;
      le_ram   <= '0;
      te_ram   <= '0;
    end else begin
      hit_q  <= hit_i;
      read_q <= read;
      if (clr) begin
        le_flag  <= 1'b0;
        hit_flag <= 1'b0;
        token    <= 1'b0;
        sel      <= 1'b0;
      end else begin
        if (le_edge && accept) begin
          le_ram  <= ts;
          le_flag <= 1'b1;
        end
        if (te_edge && le_flag && !hit_flag) begin
          te_ram   <= ts;
          hit_flag <= 1'b1;
        end
        if (hit_flag && !freeze) token <= 1'b1;
        if (read_rise)      sel <= token & ~token_in;
        else if (read_fall) sel <= 1'b0;
      end
    end
  end

  always_comb begin
    token_out = token_in | token;
    read_int  = read & sel;
    data      = read_int ? pix_data_t'{row: ROW, le: le_ram, te: te_ram} : '0;
  end

endmodule
