// xpol3_pkg -- shared types and constants of the XPOL-III digital core.
//
// The pixel matrix is 304 columns by 352 rows (107,008 pixels, as built).
// Pixels are grouped in 2x2 trigger mini-clusters, giving 152 x 176
// mini-clusters. Coordinates are pixel indices: X is the column (0 at the
// left), Y the row (0 at the top), so <xmin,ymin> is the upper-left and
// <xmax,ymax> the lower-right corner of a rectangle. Nine bits hold any
// coordinate up to 511, enough for the full matrix.
//
// The register map of the configuration interface is this design's own:
// the chip's real control protocol is not documented in the source
// material, only that the ROT and ROI live in registers and that a padding
// for the four sides can be pre-loaded.
package xpol3_pkg;

  localparam int unsigned N_COLS_DEF = 304;   // pixel columns
  localparam int unsigned N_ROWS_DEF = 352;   // pixel rows
  localparam int unsigned MC_SIZE    = 2;     // mini-cluster edge, pixels

  localparam int unsigned COORD_W = 9;        // bits per coordinate
  localparam int unsigned PAD_W   = 6;        // bits per padding value
  localparam int unsigned CNT_W   = 16;       // timing counters

  typedef logic [COORD_W-1:0] coord_t;

  // Rectangle in pixel coordinates, corners inclusive.
  typedef struct packed {
    coord_t xmin;
    coord_t ymin;
    coord_t xmax;
    coord_t ymax;
  } rect_t;

  // Padding added on each side of the ROT in hybrid mode.
  typedef struct packed {
    logic [PAD_W-1:0] left;
    logic [PAD_W-1:0] right;
    logic [PAD_W-1:0] top;
    logic [PAD_W-1:0] bottom;
  } pad_t;

  // How the ROI is obtained once the ROT is known.
  typedef enum logic {
    ROI_HYBRID   = 1'b0,  // chip adds the pre-loaded padding by itself
    ROI_EXTERNAL = 1'b1   // back-end computes the ROI and writes it
  } roi_mode_e;

  // Readout controller states.
  typedef enum logic [2:0] {
    S_IDLE     = 3'd0,  // armed, pixels tracking
    S_PEAK     = 3'd1,  // peak detection after a trigger
    S_LOAD_ROI = 3'd2,  // hybrid mode: ROI = ROT + padding
    S_WAIT_ROI = 3'd3,  // external mode: wait for ROI and start command
    S_READ     = 3'd4,  // serial scan of the ROI
    S_PED_RST  = 3'd5,  // analog reset before the pedestal sample
    S_PED_PEAK = 3'd6,  // pedestal sample (no signal) in peak-hold
    S_DONE     = 3'd7   // event read twice; ROI kept until event reset
  } seq_state_e;

  // Register map (word addresses).
  localparam logic [3:0] A_MODE   = 4'h0;  // [0] roi_mode_e
  localparam logic [3:0] A_PAD    = 4'h1;  // [5:0] L [13:8] R [21:16] T [29:24] B
  localparam logic [3:0] A_ROI_X  = 4'h2;  // W: staged xmin[8:0], xmax[24:16]; R: ROI
  localparam logic [3:0] A_ROI_Y  = 4'h3;  // W: staged ymin[8:0], ymax[24:16]; R: ROI
  localparam logic [3:0] A_ROT_X  = 4'h4;  // R: ROT xmin[8:0], xmax[24:16]
  localparam logic [3:0] A_ROT_Y  = 4'h5;  // R: ROT ymin[8:0], ymax[24:16]
  localparam logic [3:0] A_STATUS = 4'h6;  // R: [2:0] state [3] busy [4] rot_valid [5] roi_valid
  localparam logic [3:0] A_CMD    = 4'h7;  // W: [0] event reset [1] start [2] force [3] load ROI
  localparam logic [3:0] A_TIMING = 4'h8;  // [15:0] peak cycles [31:16] reset cycles

  localparam int unsigned CMD_EVT_RESET = 0;
  localparam int unsigned CMD_START     = 1;
  localparam int unsigned CMD_FORCE     = 2;
  localparam int unsigned CMD_LOAD_ROI  = 3;

  // Default timing, in readout-clock cycles.
  localparam logic [CNT_W-1:0] PEAK_CYCLES_DEF  = 16'd16;
  localparam logic [CNT_W-1:0] RESET_CYCLES_DEF = 16'd2;

  // Default padding: 3 pixels on every side, the nominal working point.
  localparam pad_t PAD_DEF = '{left: 6'd3, right: 6'd3, top: 6'd3, bottom: 6'd3};

endpackage
