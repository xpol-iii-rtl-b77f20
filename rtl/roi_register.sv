// roi_register -- region-of-interest (ROI) register.
//
// The ROI is the rectangle of pixels that is read out. It is loaded in one
// of two ways:
//   * load_rot (hybrid mode): the ROT is widened by the pre-loaded padding,
//     chosen independently for the left, right, top and bottom sides. The
//     result is clipped to the pixel matrix.
//   * ext_wr: a rectangle computed by logic outside the chip is written
//     directly. It is clipped to the matrix, and a maximum below its
//     minimum is raised to the minimum, so the ROI is never empty.
// Either way the ROI stays stored until clear (the event reset), so both
// readout passes of an event, and any repeated reads, use the same region.
//
// Interface: single clock, asynchronous active-low reset. roi/roi_valid
// change on the clock edge after a load; clear wins over a load.
//
// From the source: the hybrid mode with four independent paddings, the
// external load, and the ROI kept until explicitly reset. Clipping at the
// matrix edges and the ordering fix of an external rectangle are this
// design's own choices.
module roi_register
  import xpol3_pkg::*;
#(
  parameter int unsigned N_COLS = N_COLS_DEF,
  parameter int unsigned N_ROWS = N_ROWS_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  pad_t  pad,
  input  rect_t rot,
  input  logic  load_rot,
  input  rect_t ext_roi,
  input  logic  ext_wr,
  output rect_t roi,
  output logic  roi_valid
);

  localparam coord_t XLAST = coord_t'(N_COLS - 1);
  localparam coord_t YLAST = coord_t'(N_ROWS - 1);

  // Lower edge: c - p, floored at 0. Upper edge: c + p, capped at last.
  function automatic coord_t pad_lo(coord_t c, logic [PAD_W-1:0] p);
    return (c > coord_t'(p)) ? coord_t'(c - coord_t'(p)) : '0;
  endfunction

  function automatic coord_t pad_hi(coord_t c, logic [PAD_W-1:0] p, coord_t last);
    logic [COORD_W:0] s;
    s = {1'b0, c} + (COORD_W+1)'(p);
    return (s > {1'b0, last}) ? last : s[COORD_W-1:0];
  endfunction

  function automatic coord_t clip(coord_t c, coord_t last);
    return (c > last) ? last : c;
  endfunction

  rect_t hyb, ext;

  always_comb begin
    hyb.xmin = pad_lo(rot.xmin, pad.left);
    hyb.xmax = pad_hi(rot.xmax, pad.right, XLAST);
    hyb.ymin = pad_lo(rot.ymin, pad.top);
    hyb.ymax = pad_hi(rot.ymax, pad.bottom, YLAST);

    ext.xmin = clip(ext_roi.xmin, XLAST);
    ext.ymin = clip(ext_roi.ymin, YLAST);
    ext.xmax = clip(ext_roi.xmax, XLAST);
    ext.ymax = clip(ext_roi.ymax, YLAST);
    if (ext.xmax < ext.xmin) ext.xmax = ext.xmin;
    if (ext.ymax < ext.ymin) ext.ymax = ext.ymin;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      roi       <= '0;
      roi_valid <= 1'b0;
    end else if (clear) begin
      roi       <= '0;
      roi_valid <= 1'b0;
    end else if (ext_wr) begin
      roi       <= ext;
      roi_valid <= 1'b1;
    end else if (load_rot) begin
      roi       <= hyb;
      roi_valid <= 1'b1;
    end
  end

  // A stored ROI is a proper rectangle inside the matrix.
  a_roi_ordered: assert property (@(posedge clk) disable iff (!rst_n)
    roi_valid |-> (roi.xmin <= roi.xmax && roi.ymin <= roi.ymax &&
                   roi.xmax <= XLAST && roi.ymax <= YLAST));

endmodule
