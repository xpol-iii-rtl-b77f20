// readout_sequencer -- event readout controller of the XPOL-III core.
//
// One event goes through these steps, all clocked by the serial readout
// clock that the back-end supplies:
//   1. IDLE: pixels track (global_track = 1) and the core waits for the
//      global trigger (or a forced readout command).
//   2. PEAK: for peak_cycles cycles the pixels' peak detectors keep
//      tracking while the ROT finder accumulates triggered mini-clusters.
//      Afterwards global_track drops and every pixel holds its peak.
//   3. ROI: in hybrid mode the ROI register is loaded from ROT + padding
//      at once (LOAD_ROI, then one cycle in WAIT_ROI). In external mode,
//      or after a forced readout, the controller waits in WAIT_ROI until
//      the back-end has loaded an ROI and issued start.
//   4. READ, pass 0: one ROI pixel per clock, row by row from (xmin,ymin)
//      to (xmax,ymax); pix_valid marks the cycle in which the pixel at
//      (pix_x,pix_y) is switched onto the analog output.
//   5. PED_RST for reset_cycles (analog_reset = 1), then PED_PEAK for
//      peak_cycles with no signal: this samples each pixel's pedestal.
//   6. READ, pass 1: the same ROI again, now giving the pedestals.
//   7. DONE: the ROI stays stored; evt_reset returns to IDLE and clears
//      ROT and ROI. evt_reset aborts an event from any state.
// Triggers arriving while an event is in progress are ignored (dead time).
//
// Timing of a hybrid-mode event with an ROI of N pixels, counting the
// cycle in which IDLE sees the trigger as cycle 0: DONE is entered at
// cycle 2*N + 2*peak_cycles + reset_cycles + 3. The readout time is thus
// linear in N with two clock periods per pixel, one per pass.
//
// From the source: self-triggering, peak detection started by the chip,
// sequential routing of each ROI pixel to the output, the ROI read twice
// for pedestal subtraction, external ROI loading, forced readout of an
// externally set ROI, and the ROI kept until explicitly reset. This
// design's own choices: the state encoding, row-major scan order, one pixel
// per clock, the pedestal sample between the passes, and programmable
// peak and reset durations.
module readout_sequencer
  import xpol3_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             trig,          // global trigger (OR of mini-clusters)
  input  logic             force_rd,      // command: read the ROI without trigger
  input  logic             start,         // command: ROI loaded, start readout
  input  logic             evt_reset,     // command: end the event, rearm
  input  roi_mode_e        mode,
  input  logic [CNT_W-1:0] peak_cycles,
  input  logic [CNT_W-1:0] reset_cycles,
  input  rect_t            roi,
  input  logic             roi_valid,
  output seq_state_e       state,
  output logic             busy,
  output logic             trig_accept,   // pulse: a trigger started an event
  output logic             rot_acc_en,    // ROT finder accumulates hits
  output logic             roi_load,      // ROI register: load ROT + padding
  output logic             global_track,  // 1 = pixels track, 0 = hold
  output logic             analog_reset,
  output logic             pix_valid,
  output coord_t           pix_x,
  output coord_t           pix_y,
  output logic             pix_pass,      // 0 = signal, 1 = pedestal
  output logic             done
);

  logic [CNT_W-1:0] cnt;
  logic             forced, auto_go;
  coord_t           x, y;

  logic [CNT_W-1:0] peak_last, reset_last;
  assign peak_last  = (peak_cycles  == '0) ? '0 : peak_cycles  - 1'b1;
  assign reset_last = (reset_cycles == '0) ? '0 : reset_cycles - 1'b1;

  logic last_col, last_pix;
  assign last_col = (x == roi.xmax);
  assign last_pix = last_col && (y == roi.ymax);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cnt      <= '0;
      forced   <= 1'b0;
      auto_go  <= 1'b0;
      x        <= '0;
      y        <= '0;
      pix_pass <= 1'b0;
    end else if (evt_reset) begin
      state    <= S_IDLE;
      cnt      <= '0;
      forced   <= 1'b0;
      auto_go  <= 1'b0;
      pix_pass <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: begin
          cnt      <= '0;
          pix_pass <= 1'b0;
          if (force_rd) begin
            state  <= S_PEAK;
            forced <= 1'b1;
          end else if (trig) begin
            state  <= S_PEAK;
            forced <= 1'b0;
          end
        end
        S_PEAK: begin
          if (cnt == peak_last) begin
            cnt <= '0;
            if (!forced && mode == ROI_HYBRID) state <= S_LOAD_ROI;
            else                               state <= S_WAIT_ROI;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_LOAD_ROI: begin
          auto_go <= 1'b1;
          state   <= S_WAIT_ROI;
        end
        S_WAIT_ROI: begin
          if ((auto_go || start) && roi_valid) begin
            auto_go  <= 1'b0;
            x        <= roi.xmin;
            y        <= roi.ymin;
            pix_pass <= 1'b0;
            state    <= S_READ;
          end
        end
        S_READ: begin
          if (last_pix) begin
            x <= roi.xmin;
            y <= roi.ymin;
            state <= pix_pass ? S_DONE : S_PED_RST;
          end else if (last_col) begin
            x <= roi.xmin;
            y <= y + 1'b1;
          end else begin
            x <= x + 1'b1;
          end
        end
        S_PED_RST: begin
          if (cnt == reset_last) begin
            cnt   <= '0;
            state <= S_PED_PEAK;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_PED_PEAK: begin
          if (cnt == peak_last) begin
            cnt      <= '0;
            pix_pass <= 1'b1;
            state    <= S_READ;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DONE: ;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy         = (state != S_IDLE);
    trig_accept  = (state == S_IDLE) && trig && !force_rd && !evt_reset;
    rot_acc_en   = trig_accept || (state == S_PEAK && !forced);
    roi_load     = (state == S_LOAD_ROI);
    global_track = (state == S_IDLE) || (state == S_PEAK) ||
                   (state == S_PED_RST) || (state == S_PED_PEAK);
    analog_reset = (state == S_PED_RST);
    pix_valid    = (state == S_READ);
    pix_x        = x;
    pix_y        = y;
    done         = (state == S_DONE);
  end

  // Every pixel put on the output lies inside the stored ROI.
  a_pix_in_roi: assert property (@(posedge clk) disable iff (!rst_n)
    pix_valid |-> (roi_valid && x >= roi.xmin && x <= roi.xmax &&
                   y >= roi.ymin && y <= roi.ymax));

  // The ROI does not change while it is being read.
  a_roi_stable: assert property (@(posedge clk) disable iff (!rst_n || evt_reset)
    (state == S_READ) |=> $stable(roi));

endmodule
