// tb_readout_time -- readout time against ROI size on the full-size core.
//
// The dead time of an event is modelled as T = q + m * n_pix. This
// testbench sends hybrid-mode events whose ROTs give ROIs from 64 to 676
// pixels (padding 3), measures the cycles from the accepted
// trigger to the end of the second pass, and fits a straight line. With
// the default timing (16 peak cycles, 2 reset cycles) the core alone gives
// m = 2 cycles per pixel and q = 37 cycles; every event must match
// 2 * n + 37 exactly. The times at 6, 7.5 and 10 MHz readout clocks are
// printed; back-end delays are not included.
module tb_readout_time;
  import xpol3_pkg::*;

  localparam int NC = 304;
  localparam int NR = 352;

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

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    reg_we = 1'b1; reg_addr = a; reg_wdata = d;
    @(posedge clk); #1;
    reg_we = 1'b0;
  endtask

  real sx, sy, sxx, sxy, mfit, qfit;
  int w, h, n, cyc, cnt, r0, c0;

  initial begin
    mc_trig = '0; reg_we = 0; reg_addr = 0; reg_wdata = 0;
    sx = 0; sy = 0; sxx = 0; sxy = 0; cnt = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // ROT of (2a) x (2b) pixels from two corner mini-clusters, a,b = 1..10.
    for (int a = 1; a <= 10; a++) begin
      for (int b = 1; b <= 10; b += 3) begin
        r0 = $urandom_range(5, NR/2 - 20); c0 = $urandom_range(5, NC/2 - 20);
        w = 2*a + 6; h = 2*b + 6; n = w * h;
        mc_trig = '0;
        mc_trig[r0][c0] = 1'b1;
        mc_trig[r0 + b - 1][c0 + a - 1] = 1'b1;
        #1 check(trig_out, "trigger accepted");
        @(posedge clk); #1;
        mc_trig = '0;
        cyc = 1;
        while (!evt_done) begin @(posedge clk); #1; cyc++; end
        check(cyc == 2*n + 37, $sformatf("ROI %0d px: %0d cycles, expected %0d", n, cyc, 2*n + 37));
        sx += n; sy += cyc; sxx += real'(n) * n; sxy += real'(n) * cyc; cnt++;
        wr(A_CMD, 32'(1) << CMD_EVT_RESET);
        @(posedge clk); #1;   // the reset pulse acts in this cycle
      end
    end
    mfit = (cnt * sxy - sx * sy) / (cnt * sxx - sx * sx);
    qfit = (sy - mfit * sx) / cnt;
    check(mfit > 1.999 && mfit < 2.001, $sformatf("slope %f cycles/pixel", mfit));
    check(qfit > 36.99 && qfit < 37.01, $sformatf("offset %f cycles", qfit));
    $display("fit: T = %0.2f + %0.3f * n_pix cycles", qfit, mfit);
    $display("200-pixel ROI: %0.1f us at 6 MHz, %0.1f us at 7.5 MHz, %0.1f us at 10 MHz",
             (qfit + 200*mfit) / 6.0, (qfit + 200*mfit) / 7.5, (qfit + 200*mfit) / 10.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
