// tb_xpol3_top -- end-to-end testbench of the XPOL-III digital core at its
// full size (304 x 352 pixels, 152 x 176 mini-clusters, default timing).
//
// The testbench plays both the detector and the back-end. It raises
// mini-cluster trigger bits as a track would, lets the chip find the ROT
// and ROI, follows the two readout passes cycle by cycle and checks every
// pixel address, the one-hot column/row token selects, the register
// contents and the event duration 2*N + 2*peak + reset + 3 cycles. The
// scenarios are:
//   * the 5.9 keV event display track with padding 3 (ROI 251..264 x
//     287..312, 364 pixels), with triggers continuing during the readout;
//   * the padding sweep 2, 4 and 5 used to study track containment;
//   * a track in the matrix corner, so the padded ROI is clipped;
//   * external mode: the back-end reads the ROT, pads it with its own
//     unequal values, writes the ROI and starts the readout;
//   * forced readouts of 21 x 21 ROIs without a trigger, as in the noise
//     scan over the whole matrix;
//   * an event reset that aborts a readout.
// Each mechanism is counted and must happen at least once.
module tb_xpol3_top;
  import xpol3_pkg::*;

  localparam int NC = 304;
  localparam int NR = 352;
  localparam int MCC = NC / 2;
  localparam int MCR = NR / 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [MCR-1:0][MCC-1:0] mc_trig;
  logic reg_we;
  logic [3:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic global_track, analog_reset, pix_valid, pix_pass, trig_out, busy, evt_done;
  logic [NC-1:0] col_sel;
  logic [NR-1:0] row_sel;
  coord_t pix_x, pix_y;
  int checks = 0, failures = 0;

  xpol3_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters.
  int m_hybrid, m_external, m_force, m_clip, m_deadtime, m_abort, m_ped_pass, m_roi_kept;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    reg_we = 1'b1; reg_addr = a; reg_wdata = d;
    @(posedge clk); #1;
    reg_we = 1'b0;
  endtask

  task automatic rd(input logic [3:0] a, output logic [31:0] d);
    reg_addr = a;
    #1 d = reg_rdata;
  endtask

  task automatic cmd(input int bitpos);
    wr(A_CMD, 32'(1) << bitpos);
    @(posedge clk); #1;   // the command pulse acts one cycle after the write
  endtask

  function automatic logic [31:0] pair(input int lo, input int hi);
    return {7'd0, 9'(hi), 7'd0, 9'(lo)};
  endfunction

  // Follows the readout from the current cycle until evt_done. Checks
  // every pixel against a row-major scan of r and the token selects.
  // Returns the cycles elapsed and the pixels read per pass.
  int n_rd[2], n_bad, n_rst;
  task automatic follow(input rect_t r, input int max_cycles, output int k);
    int ex[2], ey[2];
    logic [NC-1:0] ec;
    logic [NR-1:0] er;
    ex = '{int'(r.xmin), int'(r.xmin)}; ey = '{int'(r.ymin), int'(r.ymin)};
    n_rd = '{0, 0}; n_bad = 0; n_rst = 0;
    for (k = 0; k < max_cycles; k++) begin
      if (analog_reset) n_rst++;
      if (pix_valid) begin
        int p = int'(pix_pass);
        ec = '0; er = '0; ec[ex[p]] = 1'b1; er[ey[p]] = 1'b1;
        if (pix_x != coord_t'(ex[p]) || pix_y != coord_t'(ey[p]) ||
            col_sel != ec || row_sel != er || global_track) n_bad++;
        n_rd[p]++;
        if (ex[p] == int'(r.xmax)) begin ex[p] = int'(r.xmin); ey[p]++; end
        else ex[p]++;
      end else if (col_sel != '0 || row_sel != '0) n_bad++;
      if (evt_done) break;
      @(posedge clk); #1;
    end
  endtask

  function automatic int npix(input rect_t r);
    return (int'(r.xmax) - int'(r.xmin) + 1) * (int'(r.ymax) - int'(r.ymin) + 1);
  endfunction

  function automatic int imax(int a, int b); return a > b ? a : b; endfunction
  function automatic int imin(int a, int b); return a < b ? a : b; endfunction

  // A track: list of mini-cluster hits (row, col). They fire over the
  // first cycles of the event, two per cycle.
  int hr[$], hc[$];

  task automatic fire_track(input bit keep_firing, output int n_accept);
    int i;
    n_accept = 0;
    i = 0;
    while (i < hr.size()) begin
      mc_trig = '0;
      for (int j = 0; j < 2 && i < hr.size(); j++, i++) mc_trig[hr[i]][hc[i]] = 1'b1;
      #1 if (trig_out) n_accept++;
      @(posedge clk); #1;
    end
    if (!keep_firing) mc_trig = '0;
  endtask

  function automatic rect_t track_rot();
    rect_t r;
    int c0 = MCC, c1 = -1, r0 = MCR, r1 = -1;
    foreach (hr[i]) begin
      c0 = imin(c0, hc[i]); c1 = imax(c1, hc[i]);
      r0 = imin(r0, hr[i]); r1 = imax(r1, hr[i]);
    end
    r.xmin = coord_t'(2*c0); r.xmax = coord_t'(2*c1 + 1);
    r.ymin = coord_t'(2*r0); r.ymax = coord_t'(2*r1 + 1);
    return r;
  endfunction

  task automatic random_track(input int r0, input int c0);
    hr.delete(); hc.delete();
    for (int i = 0; i < 8; i++) begin
      hr.push_back(imin(MCR - 1, imax(0, r0 + $urandom_range(0, 6) - 3)));
      hc.push_back(imin(MCC - 1, imax(0, c0 + $urandom_range(0, 6) - 3)));
    end
  endtask

  // One hybrid-mode event with padding p on all sides.
  task automatic hybrid_event(input int p, input bit keep_firing, input string tag);
    rect_t rot, exp_roi;
    logic [31:0] d;
    int k, na, n;
    rot = track_rot();
    exp_roi.xmin = coord_t'(imax(0, int'(rot.xmin) - p));
    exp_roi.ymin = coord_t'(imax(0, int'(rot.ymin) - p));
    exp_roi.xmax = coord_t'(imin(NC - 1, int'(rot.xmax) + p));
    exp_roi.ymax = coord_t'(imin(NR - 1, int'(rot.ymax) + p));
    n = npix(exp_roi);
    fire_track(keep_firing, na);
    check(na == 1, $sformatf("%s one trigger accepted", tag));
    // 16 peak cycles from the trigger cycle; hits came in ceil(size/2)
    // cycles, which is within the peak window.
    follow(exp_roi, 10000, k);
    k += (hr.size() + 1) / 2;
    check(evt_done, {tag, " done"});
    check(k == 2*n + 2*16 + 2 + 3, $sformatf("%s cycles %0d exp %0d", tag, k, 2*n + 2*16 + 2 + 3));
    check(n_rd[0] == n && n_rd[1] == n && n_bad == 0,
          $sformatf("%s two passes %0d/%0d of %0d, bad %0d", tag, n_rd[0], n_rd[1], n, n_bad));
    check(n_rst == 2, {tag, " analog reset"});
    if (n_rd[1] == n) m_ped_pass++;
    if (keep_firing) begin
      repeat (3) begin
        #1 if (trig_out) failures++;
        @(posedge clk); #1;
      end
      m_deadtime++;
      mc_trig = '0;
    end
    m_hybrid++;
    if (exp_roi.xmin == 0 || exp_roi.ymin == 0 || exp_roi.xmax == NC - 1 || exp_roi.ymax == NR - 1)
      m_clip++;
    rd(A_ROT_X, d); check(d == pair(rot.xmin, rot.xmax), {tag, " ROT_X"});
    rd(A_ROT_Y, d); check(d == pair(rot.ymin, rot.ymax), {tag, " ROT_Y"});
    rd(A_ROI_X, d); check(d == pair(exp_roi.xmin, exp_roi.xmax), $sformatf("%s ROI_X %h", tag, d));
    rd(A_ROI_Y, d); check(d == pair(exp_roi.ymin, exp_roi.ymax), $sformatf("%s ROI_Y %h", tag, d));
    repeat (5) @(posedge clk);
    #1 rd(A_ROI_X, d);
    if (d == pair(exp_roi.xmin, exp_roi.xmax) && busy) m_roi_kept++;
    cmd(CMD_EVT_RESET);
    rd(A_STATUS, d);
    check(d[5:3] == 3'b000 && !busy && global_track, {tag, " rearmed after event reset"});
  endtask

  logic [31:0] d;
  rect_t rot, r;
  int k, na;

  initial begin
    mc_trig = '0; reg_we = 0; reg_addr = 0; reg_wdata = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    check(!busy && global_track, "idle after reset");

    // 5.9 keV track: mini-cluster columns 127..130, rows 145..154.
    hr = '{150, 151, 145, 147, 154, 149, 152, 146};
    hc = '{128, 129, 129, 130, 127, 128, 128, 129};
    hybrid_event(3, 1'b1, "fe55");
    rd(A_STATUS, d);

    // Padding sweep.
    foreach (hr[i]) ;
    for (int p = 2; p <= 5; p++) begin
      if (p == 3) continue;
      wr(A_PAD, {2'b0, 6'(p), 2'b0, 6'(p), 2'b0, 6'(p), 2'b0, 6'(p)});
      random_track($urandom_range(10, MCR - 10), $urandom_range(10, MCC - 10));
      hybrid_event(p, 1'b0, $sformatf("pad%0d", p));
    end

    // Corner tracks: padding is clipped at the matrix edges.
    wr(A_PAD, {2'b0, 6'd3, 2'b0, 6'd3, 2'b0, 6'd3, 2'b0, 6'd3});
    random_track(1, 1);
    hybrid_event(3, 1'b0, "corner-ul");
    random_track(MCR - 2, MCC - 2);
    hybrid_event(3, 1'b0, "corner-lr");

    // External mode: back-end pads the ROT by 1/4/2/6 (left/right/top/bottom).
    wr(A_MODE, 32'h1);
    random_track(80, 60);
    fire_track(1'b0, na);
    check(na == 1, "external trigger accepted");
    repeat (20) @(posedge clk);
    #1 rd(A_STATUS, d);
    check(seq_state_e'(d[2:0]) == S_WAIT_ROI && !global_track, "external: waits holding");
    rot = track_rot();
    rd(A_ROT_X, d); check(d == pair(rot.xmin, rot.xmax), "external ROT_X");
    rd(A_ROT_Y, d); check(d == pair(rot.ymin, rot.ymax), "external ROT_Y");
    r.xmin = rot.xmin - 1; r.xmax = rot.xmax + 4; r.ymin = rot.ymin - 2; r.ymax = rot.ymax + 6;
    wr(A_ROI_X, pair(r.xmin, r.xmax));
    wr(A_ROI_Y, pair(r.ymin, r.ymax));
    cmd(CMD_LOAD_ROI);
    rd(A_ROI_X, d); check(d == pair(r.xmin, r.xmax), "external ROI loaded");
    wr(A_CMD, 32'(1) << CMD_START);
    follow(r, 10000, k);
    check(evt_done && n_rd[0] == npix(r) && n_rd[1] == npix(r) && n_bad == 0, "external readout");
    if (evt_done && n_bad == 0) m_external++;
    cmd(CMD_EVT_RESET);

    // Forced readouts of 21 x 21 ROIs, as in the noise scan.
    for (int t = 0; t < 3; t++) begin
      r.xmin = coord_t'($urandom_range(0, NC - 21)); r.xmax = r.xmin + 20;
      r.ymin = coord_t'($urandom_range(0, NR - 21)); r.ymax = r.ymin + 20;
      if (t == 2) begin r.xmin = 283; r.xmax = 303; r.ymin = 331; r.ymax = 351; end
      wr(A_ROI_X, pair(r.xmin, r.xmax));
      wr(A_ROI_Y, pair(r.ymin, r.ymax));
      cmd(CMD_LOAD_ROI);
      wr(A_CMD, 32'(1) << CMD_FORCE);
      #1 check(!trig_out, "force: no trigger");
      repeat (20) @(posedge clk);
      #1 check(busy && !global_track, "force: pixels held");
      wr(A_CMD, 32'(1) << CMD_START);
      follow(r, 10000, k);
      check(evt_done && n_rd[0] == 441 && n_rd[1] == 441 && n_bad == 0,
            $sformatf("forced 21x21 at (%0d,%0d)", r.xmin, r.ymin));
      if (evt_done && n_rd[0] == 441) m_force++;
      cmd(CMD_EVT_RESET);
    end

    // Abort: event reset in the middle of a hybrid readout.
    wr(A_MODE, 32'h0);
    random_track(40, 40);
    fire_track(1'b0, na);
    while (!pix_valid) begin @(posedge clk); #1; end
    repeat (10) @(posedge clk);
    wr(A_CMD, 32'(1) << CMD_EVT_RESET);
    #1 check(!busy && global_track && !pix_valid, "abort: back to idle");
    rd(A_STATUS, d);
    check(d[5:4] == 2'b00, "abort: ROT and ROI cleared");
    if (!busy) m_abort++;

    // Every mechanism must have happened.
    check(m_hybrid > 0,   $sformatf("hybrid-mode events: %0d", m_hybrid));
    check(m_external > 0, $sformatf("external-mode events: %0d", m_external));
    check(m_force > 0,    $sformatf("forced readouts: %0d", m_force));
    check(m_clip > 0,     $sformatf("clipped ROIs: %0d", m_clip));
    check(m_deadtime > 0, $sformatf("triggers ignored while busy: %0d", m_deadtime));
    check(m_abort > 0,    $sformatf("aborted events: %0d", m_abort));
    check(m_ped_pass > 0, $sformatf("pedestal passes: %0d", m_ped_pass));
    check(m_roi_kept > 0, $sformatf("ROI kept until reset: %0d", m_roi_kept));
    $display("mechanisms: hybrid=%0d external=%0d force=%0d clip=%0d deadtime=%0d abort=%0d ped=%0d kept=%0d",
             m_hybrid, m_external, m_force, m_clip, m_deadtime, m_abort, m_ped_pass, m_roi_kept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
