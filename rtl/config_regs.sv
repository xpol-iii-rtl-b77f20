// config_regs -- configuration and command registers of the XPOL-III core.
//
// A simple word-addressed register port (reg_we, reg_addr, reg_wdata,
// combinational reg_rdata) gives the back-end access to:
//   MODE    hybrid (0) or external (1) ROI definition
//   PAD     the four pre-loaded paddings used in hybrid mode
//   ROI_X/Y writing stages an external ROI; reading returns the stored ROI
//   ROT_X/Y read-only corners of the region of trigger
//   STATUS  controller state, busy, ROT and ROI valid
//   CMD     write-only pulses: event reset, start, force readout, load ROI
//   TIMING  peak-detection and analog-reset durations in clock cycles
// Field positions are given in xpol3_pkg. A CMD write produces one-cycle
// pulses in the cycle after the write; the staged ROI is loaded into the
// ROI register by the LOAD ROI command bit.
//
// From the source: a register holding the ROT corners, a register into which
// an externally computed ROI is loaded, and a pre-loaded padding adjustable
// independently on the four sides. The port, the address map, the field
// layout and the reset values (padding 3 on all sides, the nominal working
// point) are this design's own.
module config_regs
  import xpol3_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             reg_we,
  input  logic [3:0]       reg_addr,
  input  logic [31:0]      reg_wdata,
  output logic [31:0]      reg_rdata,
  // status inputs
  input  rect_t            rot,
  input  logic             rot_valid,
  input  rect_t            roi,
  input  logic             roi_valid,
  input  seq_state_e       state,
  input  logic             busy,
  // configuration outputs
  output roi_mode_e        mode,
  output pad_t             pad,
  output logic [CNT_W-1:0] peak_cycles,
  output logic [CNT_W-1:0] reset_cycles,
  output rect_t            ext_roi,
  // command pulses
  output logic             cmd_evt_reset,
  output logic             cmd_start,
  output logic             cmd_force,
  output logic             cmd_load_roi
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode          <= ROI_HYBRID;
      pad           <= PAD_DEF;
      peak_cycles   <= PEAK_CYCLES_DEF;
      reset_cycles  <= RESET_CYCLES_DEF;
      ext_roi       <= '0;
      cmd_evt_reset <= 1'b0;
      cmd_start     <= 1'b0;
      cmd_force     <= 1'b0;
      cmd_load_roi  <= 1'b0;
    end else begin
      cmd_evt_reset <= 1'b0;
      cmd_start     <= 1'b0;
      cmd_force     <= 1'b0;
      cmd_load_roi  <= 1'b0;
      if (reg_we) begin
        unique case (reg_addr)
          A_MODE:   mode <= roi_mode_e'(reg_wdata[0]);
          A_PAD: begin
            pad.left   <= reg_wdata[PAD_W-1:0];
            pad.right  <= reg_wdata[8+PAD_W-1:8];
            pad.top    <= reg_wdata[16+PAD_W-1:16];
            pad.bottom <= reg_wdata[24+PAD_W-1:24];
          end
          A_ROI_X: begin
            ext_roi.xmin <= reg_wdata[COORD_W-1:0];
            ext_roi.xmax <= reg_wdata[16+COORD_W-1:16];
          end
          A_ROI_Y: begin
            ext_roi.ymin <= reg_wdata[COORD_W-1:0];
            ext_roi.ymax <= reg_wdata[16+COORD_W-1:16];
          end
          A_CMD: begin
            cmd_evt_reset <= reg_wdata[CMD_EVT_RESET];
            cmd_start     <= reg_wdata[CMD_START];
            cmd_force     <= reg_wdata[CMD_FORCE];
            cmd_load_roi  <= reg_wdata[CMD_LOAD_ROI];
          end
          A_TIMING: begin
            peak_cycles  <= reg_wdata[15:0];
            reset_cycles <= reg_wdata[31:16];
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    reg_rdata = '0;
    unique case (reg_addr)
      A_MODE:   reg_rdata[0] = mode;
      A_PAD: begin
        reg_rdata[PAD_W-1:0]       = pad.left;
        reg_rdata[8+PAD_W-1:8]     = pad.right;
        reg_rdata[16+PAD_W-1:16]   = pad.top;
        reg_rdata[24+PAD_W-1:24]   = pad.bottom;
      end
      A_ROI_X: begin
        reg_rdata[COORD_W-1:0]     = roi.xmin;
        reg_rdata[16+COORD_W-1:16] = roi.xmax;
      end
      A_ROI_Y: begin
        reg_rdata[COORD_W-1:0]     = roi.ymin;
        reg_rdata[16+COORD_W-1:16] = roi.ymax;
      end
      A_ROT_X: begin
        reg_rdata[COORD_W-1:0]     = rot.xmin;
        reg_rdata[16+COORD_W-1:16] = rot.xmax;
      end
      A_ROT_Y: begin
        reg_rdata[COORD_W-1:0]     = rot.ymin;
        reg_rdata[16+COORD_W-1:16] = rot.ymax;
      end
      A_STATUS: reg_rdata[5:0] = {roi_valid, rot_valid, busy, state};
      A_TIMING: reg_rdata = {reset_cycles, peak_cycles};
      default:  reg_rdata = '0;
    endcase
  end

endmodule
