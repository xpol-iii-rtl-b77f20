// rot_finder -- global trigger and region-of-trigger (ROT) finder.
//
// Each of the MC_ROWS x MC_COLS mini-clusters (2x2 pixels) delivers one
// trigger bit from its own discriminator. The global trigger is the OR of
// all of them. While the readout controller holds acc_en high (the trigger
// cycle and the peak-detection window that follows) the module ORs the
// live pattern into two projection registers, one bit per mini-cluster
// column and one per mini-cluster row. The ROT, the smallest rectangle
// holding every mini-cluster that fired, then follows from the first and
// last set bit of each projection, converted to pixel coordinates:
// xmin = 2*first column, xmax = 2*last column + 1, and the same for rows.
// The ROT stays in its register until clear (the event reset).
//
// Interface: mc_trig[r][c] is mini-cluster row r, column c. trig_any is
// combinational. rot/rot_valid reflect the projections one cycle after the
// bits were accumulated. Because the ROT is built from whole mini-clusters,
// rot.xmin and rot.ymin are always even and rot.xmax and rot.ymax always
// odd, so their lowest bits are constant.
//
// From the source: the 2x2 mini-cluster, the ROT as the smallest enclosing
// rectangle, its corners kept in a register. This design's own choices:
// finding the rectangle through row and column projections, and
// accumulating hits over the whole peak-detection window, since the
// mini-clusters of one track do not all cross threshold in the same cycle.
module rot_finder
  import xpol3_pkg::*;
#(
  parameter int unsigned MC_COLS = N_COLS_DEF / MC_SIZE,
  parameter int unsigned MC_ROWS = N_ROWS_DEF / MC_SIZE
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [MC_ROWS-1:0][MC_COLS-1:0]  mc_trig,
  input  logic                             acc_en,
  input  logic                             clear,
  output logic                             trig_any,
  output rect_t                            rot,
  output logic                             rot_valid
);

  logic [MC_COLS-1:0] col_proj, col_acc;
  logic [MC_ROWS-1:0] row_proj, row_acc;

  always_comb begin
    col_proj = '0;
    for (int r = 0; r < MC_ROWS; r++) begin
      col_proj    = col_proj | mc_trig[r];
      row_proj[r] = |mc_trig[r];
    end
    trig_any = |row_proj;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_acc <= '0;
      row_acc <= '0;
    end else if (clear) begin
      col_acc <= '0;
      row_acc <= '0;
    end else if (acc_en) begin
      col_acc <= col_acc | col_proj;
      row_acc <= row_acc | row_proj;
    end
  end

  // First and last set bit of each projection.
  coord_t c_first, c_last, r_first, r_last;

  always_comb begin
    c_first = '0;
    c_last  = '0;
    for (int c = MC_COLS - 1; c >= 0; c--)
      if (col_acc[c]) c_first = coord_t'(c);
    for (int c = 0; c < MC_COLS; c++)
      if (col_acc[c]) c_last = coord_t'(c);
  end

  always_comb begin
    r_first = '0;
    r_last  = '0;
    for (int r = MC_ROWS - 1; r >= 0; r--)
      if (row_acc[r]) r_first = coord_t'(r);
    for (int r = 0; r < MC_ROWS; r++)
      if (row_acc[r]) r_last = coord_t'(r);
  end

  assign rot_valid = |col_acc;
  assign rot.xmin  = coord_t'(c_first * MC_SIZE);
  assign rot.xmax  = coord_t'(c_last * MC_SIZE + MC_SIZE - 1);
  assign rot.ymin  = coord_t'(r_first * MC_SIZE);
  assign rot.ymax  = coord_t'(r_last * MC_SIZE + MC_SIZE - 1);

endmodule
