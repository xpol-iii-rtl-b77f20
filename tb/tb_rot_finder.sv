// tb_rot_finder -- self-checking testbench of rot_finder at full size
// (176 x 152 mini-clusters).
//
// Cases: the track of a 5.9 keV event whose ROT spans pixel columns
// 254..261 and rows 290..309; random sparse patterns whose expected
// rectangle is computed from the list of hits; accumulation over several
// cycles; acc_en low ignores hits; clear empties the ROT; the global
// trigger equals the OR of all bits.
module tb_rot_finder;
  import xpol3_pkg::*;

  localparam int MC_COLS = 152;
  localparam int MC_ROWS = 176;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [MC_ROWS-1:0][MC_COLS-1:0] mc_trig;
  logic acc_en, clear, trig_any, rot_valid;
  rect_t rot;
  int checks = 0, failures = 0;

  rot_finder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  task automatic check_rot(input int x0, y0, x1, y1, input string what);
    check(rot_valid, {what, " valid"});
    check(rot.xmin == coord_t'(x0) && rot.xmax == coord_t'(x1) &&
          rot.ymin == coord_t'(y0) && rot.ymax == coord_t'(y1),
          $sformatf("%s rot=(%0d,%0d)-(%0d,%0d) exp=(%0d,%0d)-(%0d,%0d)", what,
                    rot.xmin, rot.ymin, rot.xmax, rot.ymax, x0, y0, x1, y1));
  endtask

  task automatic pulse_clear();
    clear = 1'b1;
    @(posedge clk); #1;
    clear = 1'b0;
  endtask

  int cmin, cmax, rmin, rmax, n, r, c;

  initial begin
    mc_trig = '0; acc_en = 1'b0; clear = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    check(!rot_valid && !trig_any, "empty after reset");

    // Track from the 5.9 keV event display: mini-cluster columns 127..130,
    // rows 145..154, arriving over three cycles.
    acc_en = 1'b1;
    mc_trig[150][128] = 1'b1; mc_trig[151][129] = 1'b1;
    #1 check(trig_any, "trig_any on first hit");
    @(posedge clk); #1;
    mc_trig = '0; mc_trig[145][129] = 1'b1; mc_trig[147][130] = 1'b1;
    @(posedge clk); #1;
    mc_trig = '0; mc_trig[154][127] = 1'b1;
    @(posedge clk); #1;
    mc_trig = '0;
    #1 check(!trig_any, "trig_any low with no hits");
    acc_en = 1'b0;
    check_rot(254, 290, 261, 309, "fe55 track");

    // Hits with acc_en low are ignored.
    mc_trig[0][0] = 1'b1; mc_trig[175][151] = 1'b1;
    @(posedge clk); #1;
    mc_trig = '0;
    check_rot(254, 290, 261, 309, "no accumulation when acc_en low");

    pulse_clear();
    check(!rot_valid, "clear empties ROT");

    // Corners of the matrix.
    acc_en = 1'b1;
    mc_trig[0][0] = 1'b1; mc_trig[175][151] = 1'b1;
    @(posedge clk); #1;
    mc_trig = '0; acc_en = 1'b0;
    check_rot(0, 0, 303, 351, "full matrix");
    pulse_clear();

    // Random sparse patterns.
    for (int t = 0; t < 200; t++) begin
      n = 1 + $urandom_range(0, 6);
      cmin = MC_COLS; cmax = -1; rmin = MC_ROWS; rmax = -1;
      acc_en = 1'b1;
      for (int k = 0; k < n; k++) begin
        r = $urandom_range(0, MC_ROWS - 1);
        c = $urandom_range(0, MC_COLS - 1);
        mc_trig = '0;
        mc_trig[r][c] = 1'b1;
        if (c < cmin) cmin = c;
        if (c > cmax) cmax = c;
        if (r < rmin) rmin = r;
        if (r > rmax) rmax = r;
        @(posedge clk); #1;
      end
      mc_trig = '0; acc_en = 1'b0;
      check_rot(2*cmin, 2*rmin, 2*cmax + 1, 2*rmax + 1, $sformatf("random %0d", t));
      pulse_clear();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
