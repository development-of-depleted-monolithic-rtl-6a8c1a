// eoc: end-of-column block.
//
// Holds the column's Gray time stamp generator and arbitrates between columns.
// The end-of-column blocks form a priority chain (column 0 first): tok_out =
// tok_in | column token. On the rising edge of the global `read` line a block
// latches whether its column is the first one with a token; only that column
// gets the read pulse (`col_read = read & selected`). Data propagate along the
// same chain: a selected block replaces the incoming word with its own column
// address and the column data bus, any other block passes the incoming word
// on. The last block's output feeds the serializer.
//
// Timing: col_read follows read one clock later and falls with it; the word is
// valid from the clock the selected pixel's read_int rises (read + 2 clocks).
// Follows the paper: time stamp generation, priority arbitration and data
// propagation in the end of column. Own choices: the selection mechanism is
// the same load-flop scheme as in the pixel, and the column address is
// appended here.
module eoc
  import lfm_pkg::*;
#(
  parameter logic [COL_W-1:0] COL = '0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ts_en,     // one strobe per time stamp clock period
  output logic [TS_W-1:0] ts,        // time stamp to the column
  input  logic            col_token, // column token
  input  pix_data_t       col_data,  // column data bus
  output logic            col_read,  // read line of the column
  input  logic            read,      // global read from the readout controller
  input  logic            tok_in,    // token of higher-priority columns
  output logic            tok_out,
  input  hit_word_t       data_in,   // word from the previous end of column
  output hit_word_t       data_out
);

  logic read_q, sel;

  ts_gray_gen #(.W(TS_W)) u_ts (.clk, .rst_n, .ts_en, .ts_gray(ts));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      read_q <= 1'b0;
      sel    <= 1'b0;
    end else begin
      read_q <= read;
      if (read && !read_q) sel <= col_token & ~tok_in;
      else if (!read)      sel <= 1'b0;
    end
  end

  always_comb begin
    col_read = read & sel;
    tok_out  = tok_in | col_token;
    data_out = sel ? hit_word_t'{col: COL, pix: col_data} : data_in;
  end

endmodule
