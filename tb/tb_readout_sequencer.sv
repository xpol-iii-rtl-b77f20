// tb_readout_sequencer -- self-checking testbench of readout_sequencer.
//
// The testbench stands in for the ROI register: a roi_load pulse makes
// the planned ROI valid on the next clock, and evt_reset clears it. Each
// event is followed cycle by cycle: the pixel addresses put out in each
// pass are compared with a row-major list built from the ROI corners, the
// cycle in which DONE is reached is compared with 2*N + 2*P + R + 3
// (N ROI pixels, P peak cycles, R reset cycles), and the hold, reset and
// accumulate strobes are counted. Also covered: triggers during an event
// are ignored, external mode waits for start, a forced readout does not
// accumulate trigger hits, and evt_reset aborts a readout.
module tb_readout_sequencer;
  import xpol3_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic trig, force_rd, start, evt_reset;
  roi_mode_e mode;
  logic [CNT_W-1:0] peak_cycles, reset_cycles;
  rect_t roi, planned;
  logic roi_valid;
  seq_state_e state;
  logic busy, trig_accept, rot_acc_en, roi_load, global_track, analog_reset;
  logic pix_valid, pix_pass, done;
  coord_t pix_x, pix_y;
  int checks = 0, failures = 0;

  readout_sequencer dut (.*);

  always #5 clk = ~clk;

  // ROI register stand-in.
  always_ff @(posedge clk) begin
    if (evt_reset) roi_valid <= 1'b0;
    else if (roi_load) begin
      roi       <= planned;
      roi_valid <= 1'b1;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Follows an event from the current cycle until DONE (or max cycles).
  // Returns the number of cycles from the first to the DONE cycle.
  int n_read[2], n_bad[2], n_rst, n_hold_in_read, n_acc, n_acc_forced, n_accept;
  task automatic follow(input rect_t r, input int max_cycles, input bit do_start,
                        input bit spam_trig, input bit forced, output int k);
    int ex[2], ey[2];
    ex = '{r.xmin, r.xmin}; ey = '{r.ymin, r.ymin};
    n_read = '{0, 0}; n_bad = '{0, 0}; n_rst = 0; n_hold_in_read = 0;
    n_acc = 0; n_accept = 0;
    for (k = 0; k < max_cycles; k++) begin
      if (spam_trig && k > 0) trig = ($urandom_range(0, 1) == 1);
      if (do_start && state == S_WAIT_ROI && roi_valid) start = 1'b1;
      #1;
      if (trig_accept) n_accept++;
      if (rot_acc_en) n_acc++;
      if (analog_reset) n_rst++;
      if (pix_valid) begin
        int p = int'(pix_pass);
        if (global_track) n_hold_in_read++;
        if (pix_x != coord_t'(ex[p]) || pix_y != coord_t'(ey[p])) n_bad[p]++;
        n_read[p]++;
        if (ex[p] == r.xmax) begin ex[p] = r.xmin; ey[p]++; end
        else ex[p]++;
      end
      if (done) break;
      @(posedge clk); #1;
      start = 1'b0;
      if (k == 0 && !spam_trig) trig = 1'b0;
    end
    trig = 1'b0; start = 1'b0;
  endtask

  task automatic do_reset_event();
    evt_reset = 1'b1;
    @(posedge clk); #1;
    evt_reset = 1'b0;
    check(state == S_IDLE && !roi_valid, "event reset returns to IDLE");
  endtask

  int k, n, P, R, w;
  rect_t r;

  initial begin
    trig = 0; force_rd = 0; start = 0; evt_reset = 0;
    mode = ROI_HYBRID; peak_cycles = 4; reset_cycles = 2;
    roi = '0; roi_valid = 1'b0; planned = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    check(state == S_IDLE && global_track && !busy, "idle after reset");

    // Hybrid events with random ROIs and timing; triggers keep arriving.
    for (int t = 0; t < 40; t++) begin
      P = $urandom_range(1, 20); R = $urandom_range(1, 5);
      peak_cycles = CNT_W'(P); reset_cycles = CNT_W'(R);
      r.xmin = coord_t'($urandom_range(0, 290)); r.xmax = r.xmin + coord_t'($urandom_range(0, 13));
      r.ymin = coord_t'($urandom_range(0, 340)); r.ymax = r.ymin + coord_t'($urandom_range(0, 11));
      planned = r;
      n = (r.xmax - r.xmin + 1) * (r.ymax - r.ymin + 1);
      trig = 1'b1;
      follow(r, 5000, 1'b0, (t % 2) == 1, 1'b0, k);
      check(done, $sformatf("hybrid %0d reaches DONE", t));
      check(k == 2*n + 2*P + R + 3, $sformatf("hybrid %0d cycles %0d exp %0d", t, k, 2*n + 2*P + R + 3));
      check(n_read[0] == n && n_read[1] == n, $sformatf("hybrid %0d two passes of %0d", t, n));
      check(n_bad[0] == 0 && n_bad[1] == 0, $sformatf("hybrid %0d scan order", t));
      check(n_rst == R, $sformatf("hybrid %0d reset cycles %0d", t, n_rst));
      check(n_hold_in_read == 0, $sformatf("hybrid %0d pixels held while read", t));
      check(n_accept == 1, $sformatf("hybrid %0d one accepted trigger (%0d)", t, n_accept));
      check(n_acc == P + 1, $sformatf("hybrid %0d accumulate window %0d", t, n_acc));
      // DONE holds until event reset, whatever the trigger does.
      trig = 1'b1;
      repeat (5) @(posedge clk);
      #1 check(state == S_DONE && busy && !global_track, "DONE holds");
      trig = 1'b0;
      do_reset_event();
    end

    // External mode: waits for the ROI and the start command.
    mode = ROI_EXTERNAL; peak_cycles = 3; reset_cycles = 1;
    trig = 1'b1;
    @(posedge clk); #1 trig = 1'b0;
    repeat (3) @(posedge clk);
    #1 check(state == S_WAIT_ROI, "external: waits for ROI");
    w = 0;
    repeat (10) begin
      @(posedge clk); #1;
      if (state == S_WAIT_ROI && !global_track && !pix_valid) w++;
    end
    check(w == 10, "external: stays in WAIT_ROI holding");
    roi = '{xmin: 20, ymin: 30, xmax: 22, ymax: 31}; roi_valid = 1'b1;
    @(posedge clk); #1;
    check(state == S_WAIT_ROI, "external: no start, no readout");
    follow(roi, 200, 1'b1, 1'b0, 1'b0, k);
    check(done && n_read[0] == 6 && n_read[1] == 6 && n_bad[0] == 0 && n_bad[1] == 0,
          "external: two passes of 6 pixels");
    do_reset_event();

    // Forced readout (no trigger): hits are not accumulated.
    mode = ROI_HYBRID;
    roi = '{xmin: 100, ymin: 100, xmax: 120, ymax: 120}; roi_valid = 1'b1;
    force_rd = 1'b1;
    #1 check(!trig_accept && !rot_acc_en, "force: no trigger accept");
    @(posedge clk); #1 force_rd = 1'b0;
    trig = 1'b1;
    n_acc_forced = 0;
    repeat (3) begin #1 if (rot_acc_en) n_acc_forced++; @(posedge clk); #1; end
    trig = 1'b0;
    check(n_acc_forced == 0, "force: ROT not accumulated");
    follow(roi, 5000, 1'b1, 1'b0, 1'b1, k);
    check(done && n_read[0] == 441 && n_read[1] == 441 && n_bad[0] == 0 && n_bad[1] == 0,
          "force: 21x21 ROI read twice");
    do_reset_event();

    // Event reset aborts a readout.
    planned = '{xmin: 0, ymin: 0, xmax: 9, ymax: 9};
    trig = 1'b1;
    @(posedge clk); #1 trig = 1'b0;
    while (!pix_valid) begin @(posedge clk); #1; end
    repeat (7) @(posedge clk);
    #1 check(pix_valid, "abort: reading");
    do_reset_event();
    check(!busy && global_track, "abort: rearmed");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
