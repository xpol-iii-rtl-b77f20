// tb_noise_scan -- noise-scan workload on the full-size core.
//
// The pedestal noise of every pixel is measured by reading the matrix in
// 21 x 21 regions set from outside, with no trigger: for each region the
// back-end loads the ROI, issues a forced readout, starts it and resets
// the event. Regions start every 20 pixels, with the last row and column
// of regions pushed against the matrix edge, so neighbouring regions
// overlap and together cover all 304 x 352 pixels (16 x 18 = 288 regions).
// The testbench checks every pixel address of both passes and that every
// pixel of the matrix was read at least once, and measures the cycles per
// region.
module tb_noise_scan;
  import xpol3_pkg::*;

  localparam int NC = 304;
  localparam int NR = 352;
  localparam int S  = 21;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NR/2-1:0][NC/2-1:0] mc_trig;
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
    repeat (2000000) @(posedge clk);
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

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    reg_we = 1'b1; reg_addr = a; reg_wdata = d;
    @(posedge clk); #1;
    reg_we = 1'b0;
  endtask

  function automatic logic [31:0] pair(input int lo, input int hi);
    return {7'd0, 9'(hi), 7'd0, 9'(lo)};
  endfunction

  bit seen [NR][NC];
  int n_seen, n_roi, bad, cyc, x0, y0, ex, ey, p, nrd[2];

  initial begin
    mc_trig = '0; reg_we = 0; reg_addr = 0; reg_wdata = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    wr(A_MODE, 32'h1);
    n_roi = 0;
    for (int j = 0; j < 18; j++) begin
      for (int i = 0; i < 16; i++) begin
        x0 = (i == 15) ? NC - S : 20 * i;
        y0 = (j == 17) ? NR - S : 20 * j;
        wr(A_ROI_X, pair(x0, x0 + S - 1));
        wr(A_ROI_Y, pair(y0, y0 + S - 1));
        wr(A_CMD, 32'(1) << CMD_LOAD_ROI);
        wr(A_CMD, 32'(1) << CMD_FORCE);
        cyc = 0;
        while (!(busy && !global_track)) begin @(posedge clk); #1; cyc++; end
        wr(A_CMD, 32'(1) << CMD_START);
        cyc++;
        bad = 0; nrd = '{0, 0};
        while (!evt_done) begin
          if (pix_valid) begin
            p = int'(pix_pass);
            ex = x0 + nrd[p] % S;
            ey = y0 + nrd[p] / S;
            if (int'(pix_x) != ex || int'(pix_y) != ey || !col_sel[ex] || !row_sel[ey]) bad++;
            seen[ey][ex] = 1'b1;
            nrd[p]++;
          end
          @(posedge clk); #1; cyc++;
        end
        check(bad == 0 && nrd[0] == S*S && nrd[1] == S*S,
              $sformatf("ROI (%0d,%0d): bad %0d, read %0d/%0d", x0, y0, bad, nrd[0], nrd[1]));
        if (n_roi == 0) $display("cycles per 21x21 region, force to done: %0d", cyc);
        wr(A_CMD, 32'(1) << CMD_EVT_RESET);
        n_roi++;
      end
    end
    n_seen = 0;
    foreach (seen[r, c]) n_seen += int'(seen[r][c]);
    check(n_seen == NC * NR, $sformatf("pixels covered %0d of %0d", n_seen, NC * NR));
    check(n_roi == 288, "288 regions");
    $display("noise scan: %0d regions, %0d pixels covered", n_roi, n_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
