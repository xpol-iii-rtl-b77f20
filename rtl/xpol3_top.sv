// xpol3_top -- digital core of the XPOL-III self-triggering pixel readout chip.
//
// The chip reads a matrix of N_COLS x N_ROWS hexagonal pixels (304 x 352 as
// built). The analog parts, which are outside this RTL, are:
//   * each pixel's charge amplifier, shaper and peak-hold;
//   * one AC-coupled trigger discriminator per 2x2-pixel mini-cluster,
//     whose outputs arrive here as mc_trig;
//   * the differential output buffer to the external ADC.
// The core finds the region of trigger (rot_finder), turns it into a
// region of interest (roi_register), sequences peak detection and the
// two-pass serial readout of the ROI (readout_sequencer), and selects
// the pixel on the analog output (token_decoder). The back-end
// configures and commands it through config_regs.
//
// Ports: clk is the serial readout clock from the back-end. mc_trig[r][c]
// are the mini-cluster trigger bits. global_track, analog_reset and the
// one-hot col_sel/row_sel go to the pixel matrix. pix_valid/pix_x/pix_y/
// pix_pass tell the back-end which pixel, and which pass, the analog
// output carries in each clock cycle. trig_out pulses when a trigger starts
// an event; busy is high from then until the event reset; evt_done is high
// once both readout passes are over.
//
// Timing: an ROI of N pixels in hybrid mode is finished
// 2*N + 2*peak_cycles + reset_cycles + 3 cycles after the trigger cycle.
module xpol3_top
  import xpol3_pkg::*;
#(
  parameter int unsigned N_COLS = N_COLS_DEF,
  parameter int unsigned N_ROWS = N_ROWS_DEF
) (
  input  logic                                           clk,
  input  logic                                           rst_n,
  input  logic [N_ROWS/MC_SIZE-1:0][N_COLS/MC_SIZE-1:0]  mc_trig,
  input  logic                                           reg_we,
  input  logic [3:0]                                     reg_addr,
  input  logic [31:0]                                    reg_wdata,
  output logic [31:0]                                    reg_rdata,
  output logic                                           global_track,
  output logic                                           analog_reset,
  output logic [N_COLS-1:0]                              col_sel,
  output logic [N_ROWS-1:0]                              row_sel,
  output logic                                           pix_valid,
  output coord_t                                         pix_x,
  output coord_t                                         pix_y,
  output logic                                           pix_pass,
  output logic                                           trig_out,
  output logic                                           busy,
  output logic                                           evt_done
);

  localparam int unsigned MC_COLS = N_COLS / MC_SIZE;
  localparam int unsigned MC_ROWS = N_ROWS / MC_SIZE;

  roi_mode_e        mode;
  pad_t             pad;
  logic [CNT_W-1:0] peak_cycles, reset_cycles;
  rect_t            ext_roi, rot, roi;
  logic             rot_valid, roi_valid;
  logic             cmd_evt_reset, cmd_start, cmd_force, cmd_load_roi;
  logic             trig_any, rot_acc_en, roi_load;
  seq_state_e       state;

  config_regs u_regs (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata,
    .rot, .rot_valid, .roi, .roi_valid, .state, .busy,
    .mode, .pad, .peak_cycles, .reset_cycles, .ext_roi,
    .cmd_evt_reset, .cmd_start, .cmd_force, .cmd_load_roi
  );

  rot_finder #(.MC_COLS(MC_COLS), .MC_ROWS(MC_ROWS)) u_rot (
    .clk, .rst_n, .mc_trig,
    .acc_en   (rot_acc_en),
    .clear    (cmd_evt_reset),
    .trig_any,
    .rot, .rot_valid
  );

  roi_register #(.N_COLS(N_COLS), .N_ROWS(N_ROWS)) u_roi (
    .clk, .rst_n,
    .clear    (cmd_evt_reset),
    .pad, .rot,
    .load_rot (roi_load),
    .ext_roi,
    .ext_wr   (cmd_load_roi),
    .roi, .roi_valid
  );

  readout_sequencer u_seq (
    .clk, .rst_n,
    .trig       (trig_any),
    .force_rd   (cmd_force),
    .start      (cmd_start),
    .evt_reset  (cmd_evt_reset),
    .mode, .peak_cycles, .reset_cycles, .roi, .roi_valid,
    .state, .busy,
    .trig_accept(trig_out),
    .rot_acc_en, .roi_load, .global_track, .analog_reset,
    .pix_valid, .pix_x, .pix_y, .pix_pass,
    .done       (evt_done)
  );

  token_decoder #(.N_COLS(N_COLS), .N_ROWS(N_ROWS)) u_tok (
    .valid (pix_valid),
    .x     (pix_x),
    .y     (pix_y),
    .col_sel, .row_sel
  );

endmodule
