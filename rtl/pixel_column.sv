// pixel_column: one column of the matrix, N_ROWS pixel readout cells sharing
// the column lines (time stamp, freeze, read and the 24-bit data bus).
//
// The token is a ripple chain from row 0 (highest priority) to row N_ROWS-1;
// the end of the chain is the column token seen by the end-of-column logic.
// The data bus is the OR of all cells' outputs, which are zero except for the
// single cell being read. Row r holds address r in its ROM.
//
// Timing: combinational token chain and data bus; cells as in pixel_ro_logic.
// Follows the paper: column-wide freeze/read/time stamp/data bus, token
// propagated through the pixels. Own choice: row 0 has the highest priority.
module pixel_column
  import lfm_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ROWS-1:0]   en,
  input  logic [ROWS-1:0]   hit,
  input  logic [TS_W-1:0]   ts,
  input  logic              freeze,
  input  logic              read,
  output logic              token,      // any pixel of the column holds a token
  output logic [ROWS-1:0]   read_int,
  output pix_data_t         data
);

  logic [ROWS:0] chain;
  pix_data_t     pdata [ROWS];

  assign chain[0] = 1'b0;

  for (genvar r = 0; r < ROWS; r++) begin : g_pix
    pixel_ro_logic #(.ROW(ROW_W'(r))) u_pix (
      .clk, .rst_n,
      .en(en[r]), .hit(hit[r]), .ts, .freeze, .read,
      .token_in(chain[r]), .token_out(chain[r+1]),
      .read_int(read_int[r]), .data(pdata[r])
    );
  end

  always_comb begin
    data = '0;
    for (int r = 0; r < int'(ROWS); r++) data = data | pdata[r];
  end

  assign token = chain[ROWS];

  // Only one pixel of a column may drive the bus.
  a_one_reader: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(read_int));

endmodule
