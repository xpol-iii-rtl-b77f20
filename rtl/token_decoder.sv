// token_decoder -- readout token generation for the pixel matrix.
//
// During the serial readout exactly one pixel at a time closes its
// "Readout Token" switch and drives the chip's analog output line. This
// module turns the pixel address from the readout controller into a
// one-hot column select and a one-hot row select; the pixel at the crossing
// of the selected column and row is the one whose token is active. With
// valid low both selects are all zero and no pixel is connected.
//
// Interface: purely combinational; col_sel[x] and row_sel[y].
//
// From the source: a per-pixel readout token that connects the held pixel
// level to the analog output. The row/column decoding is this design's own
// choice; the actual distribution of the token inside the matrix is not
// documented.
module token_decoder
  import xpol3_pkg::*;
#(
  parameter int unsigned N_COLS = N_COLS_DEF,
  parameter int unsigned N_ROWS = N_ROWS_DEF
) (
  input  logic              valid,
  input  coord_t            x,
  input  coord_t            y,
  output logic [N_COLS-1:0] col_sel,
  output logic [N_ROWS-1:0] row_sel
);

  always_comb begin
    col_sel = '0;
    row_sel = '0;
    for (int c = 0; c < N_COLS; c++)
      col_sel[c] = valid && (x == coord_t'(c));
    for (int r = 0; r < N_ROWS; r++)
      row_sel[r] = valid && (y == coord_t'(r));
  end

endmodule
