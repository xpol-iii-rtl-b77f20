// tb_config_regs -- self-checking testbench of config_regs.
//
// Checks reset values (hybrid mode, padding 3 on all sides, default
// timing), write/read-back of MODE, PAD and TIMING, staging of an external
// ROI, read-back of the ROT, ROI and status inputs, and that each CMD bit
// gives exactly one one-cycle pulse.
module tb_config_regs;
  import xpol3_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic reg_we;
  logic [3:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  rect_t rot, roi, ext_roi;
  logic rot_valid, roi_valid, busy;
  seq_state_e state;
  roi_mode_e mode;
  pad_t pad;
  logic [CNT_W-1:0] peak_cycles, reset_cycles;
  logic cmd_evt_reset, cmd_start, cmd_force, cmd_load_roi;
  int checks = 0, failures = 0;

  config_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
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

  int pulses[4];

  initial begin
    reg_we = 0; reg_addr = 0; reg_wdata = 0;
    rot = '{xmin: 254, ymin: 290, xmax: 261, ymax: 309};
    roi = '{xmin: 251, ymin: 287, xmax: 264, ymax: 312};
    rot_valid = 1; roi_valid = 0; busy = 1; state = S_READ;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    check(mode == ROI_HYBRID, "reset mode hybrid");
    check(pad.left == 3 && pad.right == 3 && pad.top == 3 && pad.bottom == 3, "reset padding 3");
    check(peak_cycles == 16 && reset_cycles == 2, "reset timing");

    reg_addr = A_ROT_X; #1 check(reg_rdata == {7'd0, 9'd261, 7'd0, 9'd254}, "ROT_X");
    reg_addr = A_ROT_Y; #1 check(reg_rdata == {7'd0, 9'd309, 7'd0, 9'd290}, "ROT_Y");
    reg_addr = A_ROI_X; #1 check(reg_rdata == {7'd0, 9'd264, 7'd0, 9'd251}, "ROI_X");
    reg_addr = A_ROI_Y; #1 check(reg_rdata == {7'd0, 9'd312, 7'd0, 9'd287}, "ROI_Y");
    reg_addr = A_STATUS; #1 check(reg_rdata == 32'h0000_001C, $sformatf("STATUS %h", reg_rdata));

    wr(A_MODE, 32'h1);
    check(mode == ROI_EXTERNAL, "mode external");
    reg_addr = A_MODE; #1 check(reg_rdata == 32'h1, "MODE read");
    wr(A_PAD, 32'h05_04_02_3F);
    check(pad.left == 63 && pad.right == 2 && pad.top == 4 && pad.bottom == 5, "PAD fields");
    reg_addr = A_PAD; #1 check(reg_rdata == 32'h05_04_02_3F, "PAD read");
    wr(A_TIMING, 32'h0007_0021);
    check(peak_cycles == 16'h21 && reset_cycles == 16'h7, "TIMING fields");
    reg_addr = A_TIMING; #1 check(reg_rdata == 32'h0007_0021, "TIMING read");
    wr(A_ROI_X, {7'd0, 9'd120, 7'd0, 9'd100});
    wr(A_ROI_Y, {7'd0, 9'd220, 7'd0, 9'd200});
    check(ext_roi.xmin == 100 && ext_roi.xmax == 120 && ext_roi.ymin == 200 && ext_roi.ymax == 220,
          "external ROI staged");

    // Each CMD bit: a single one-cycle pulse.
    for (int b = 0; b < 4; b++) begin
      pulses = '{0, 0, 0, 0};
      reg_we = 1'b1; reg_addr = A_CMD; reg_wdata = 32'(1) << b;
      @(posedge clk); #1;
      reg_we = 1'b0;
      repeat (4) begin
        pulses[0] += int'(cmd_evt_reset); pulses[1] += int'(cmd_start);
        pulses[2] += int'(cmd_force);     pulses[3] += int'(cmd_load_roi);
        @(posedge clk); #1;
      end
      for (int j = 0; j < 4; j++)
        check(pulses[j] == (j == b ? 1 : 0), $sformatf("CMD bit %0d -> pulse %0d = %0d", b, j, pulses[j]));
    end

    // A write to a read-only register changes nothing.
    wr(A_ROT_X, 32'hFFFF_FFFF);
    check(mode == ROI_EXTERNAL && pad.left == 63 && peak_cycles == 16'h21, "read-only write ignored");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
