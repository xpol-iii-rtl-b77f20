// tb_roi_register -- self-checking testbench of roi_register at full size
// (304 x 352 pixels).
//
// Cases: the event display example (ROT columns 254..261, rows 290..309,
// padding 3 on all sides gives ROI columns 251..264, rows 287..312);
// random ROTs and independent random paddings, including ones that reach
// past the matrix edges, checked against a reference written with plain
// integers; external loads including out-of-range and reversed corners;
// the ROI staying put without a load; clear.
module tb_roi_register;
  import xpol3_pkg::*;

  localparam int NC = 304;
  localparam int NR = 352;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear, load_rot, ext_wr, roi_valid;
  pad_t pad;
  rect_t rot, ext_roi, roi;
  int checks = 0, failures = 0;

  roi_register dut (.*);

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

  task automatic check_roi(input int x0, y0, x1, y1, input string what);
    check(roi_valid, {what, " valid"});
    check(roi.xmin == coord_t'(x0) && roi.xmax == coord_t'(x1) &&
          roi.ymin == coord_t'(y0) && roi.ymax == coord_t'(y1),
          $sformatf("%s roi=(%0d,%0d)-(%0d,%0d) exp=(%0d,%0d)-(%0d,%0d)", what,
                    roi.xmin, roi.ymin, roi.xmax, roi.ymax, x0, y0, x1, y1));
  endtask

  function automatic int imax(int a, int b); return a > b ? a : b; endfunction
  function automatic int imin(int a, int b); return a < b ? a : b; endfunction

  task automatic do_load_rot();
    load_rot = 1'b1;
    @(posedge clk); #1;
    load_rot = 1'b0;
  endtask

  task automatic do_ext();
    ext_wr = 1'b1;
    @(posedge clk); #1;
    ext_wr = 1'b0;
  endtask

  int x0, x1, y0, y1, pl, pr, pt, pb, a, b;

  initial begin
    clear = 1'b0; load_rot = 1'b0; ext_wr = 1'b0;
    pad = '0; rot = '0; ext_roi = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    check(!roi_valid, "empty after reset");

    // Event display example, padding 3.
    rot = '{xmin: 254, ymin: 290, xmax: 261, ymax: 309};
    pad = '{left: 3, right: 3, top: 3, bottom: 3};
    do_load_rot();
    check_roi(251, 287, 264, 312, "fe55 ROI = ROT + 3");

    // Held without a load, even if ROT and padding change.
    rot = '{xmin: 10, ymin: 10, xmax: 11, ymax: 11};
    pad = '{left: 5, right: 5, top: 5, bottom: 5};
    repeat (3) @(posedge clk);
    #1 check_roi(251, 287, 264, 312, "ROI kept until reset");

    clear = 1'b1; @(posedge clk); #1 clear = 1'b0;
    check(!roi_valid, "clear");

    // Random ROT and padding.
    for (int t = 0; t < 400; t++) begin
      a = $urandom_range(0, NC/2 - 1); b = $urandom_range(a, NC/2 - 1);
      x0 = 2*a; x1 = 2*b + 1;
      a = $urandom_range(0, NR/2 - 1); b = $urandom_range(a, NR/2 - 1);
      y0 = 2*a; y1 = 2*b + 1;
      if (t % 4 == 0) begin x0 = 0; y1 = NR - 1; end
      pl = $urandom_range(0, 63); pr = $urandom_range(0, 63);
      pt = $urandom_range(0, 63); pb = $urandom_range(0, 63);
      if (t % 2 == 1) begin pl = $urandom_range(0, 8); pr = $urandom_range(0, 8);
                            pt = $urandom_range(0, 10); pb = $urandom_range(0, 10); end
      rot = '{xmin: coord_t'(x0), ymin: coord_t'(y0), xmax: coord_t'(x1), ymax: coord_t'(y1)};
      pad = '{left: 6'(pl), right: 6'(pr), top: 6'(pt), bottom: 6'(pb)};
      do_load_rot();
      check_roi(imax(0, x0 - pl), imax(0, y0 - pt), imin(NC - 1, x1 + pr),
                imin(NR - 1, y1 + pb), $sformatf("hybrid %0d", t));
    end

    // External loads.
    ext_roi = '{xmin: 100, ymin: 200, xmax: 120, ymax: 220};
    do_ext();
    check_roi(100, 200, 120, 220, "external 21x21");
    ext_roi = '{xmin: 300, ymin: 340, xmax: 511, ymax: 400};
    do_ext();
    check_roi(300, 340, 303, 351, "external clipped");
    ext_roi = '{xmin: 50, ymin: 60, xmax: 40, ymax: 10};
    do_ext();
    check_roi(50, 60, 50, 60, "external reversed corners");
    // External write wins over a simultaneous hybrid load.
    ext_roi = '{xmin: 7, ymin: 8, xmax: 9, ymax: 10};
    ext_wr = 1'b1; load_rot = 1'b1;
    @(posedge clk); #1;
    ext_wr = 1'b0; load_rot = 1'b0;
    check_roi(7, 8, 9, 10, "external priority");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
