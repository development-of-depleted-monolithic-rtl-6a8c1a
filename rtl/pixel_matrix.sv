// pixel_matrix: the full pixel array, COLS independent pixel columns.
//
// Each column has its own time stamp bus (driven by its end-of-column block),
// its own read line (gated by the end-of-column arbitration) and returns its
// token and data bus. Freeze is common to the whole matrix.
// The nine pixel flavours of the chip (four adjacent columns each) differ only
// in analog front end and gate style, so every column has the same logic here.
module pixel_matrix
  import lfm_pkg::*;
#(
  parameter int unsigned COLS = N_COLS,
  parameter int unsigned ROWS = N_ROWS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [COLS-1:0][ROWS-1:0]  en,
  input  logic [COLS-1:0][ROWS-1:0]  hit,
  input  logic [COLS-1:0][TS_W-1:0]  ts,
  input  logic                       freeze,
  input  logic [COLS-1:0]            read,
  output logic [COLS-1:0]            token,
  output pix_data_t [COLS-1:0]       data
);

  for (genvar c = 0; c < COLS; c++) begin : g_col
    pixel_column #(.ROWS(ROWS)) u_col (
      .clk, .rst_n,
      .en(en[c]), .hit(hit[c]), .ts(ts[c]), .freeze, .read(read[c]),
      .token(token[c]), .read_int(), .data(data[c])
    );
  end

endmodule
