// tb_token_decoder -- self-checking testbench of token_decoder at full size.
//
// For every column and every row, and for random addresses, checks that
// exactly the addressed column and row select lines are set, and that
// nothing is selected when valid is low.
module tb_token_decoder;
  import xpol3_pkg::*;

  localparam int NC = 304;
  localparam int NR = 352;

  logic valid;
  coord_t x, y;
  logic [NC-1:0] col_sel;
  logic [NR-1:0] row_sel;
  int checks = 0, failures = 0;

  token_decoder dut (.*);

  initial begin
    #100000;
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

  task automatic probe(input int cx, input int ry);
    logic [NC-1:0] ec;
    logic [NR-1:0] er;
    ec = '0; er = '0;
    ec[cx] = 1'b1; er[ry] = 1'b1;
    valid = 1'b1; x = coord_t'(cx); y = coord_t'(ry);
    #1;
    check(col_sel == ec && row_sel == er, $sformatf("select (%0d,%0d)", cx, ry));
    check($countones(col_sel) == 1 && $countones(row_sel) == 1, "one-hot");
  endtask

  initial begin
    for (int c = 0; c < NC; c++) probe(c, NR - 1 - (c % NR));
    for (int r = 0; r < NR; r++) probe(r % NC, r);
    for (int t = 0; t < 200; t++) probe($urandom_range(0, NC - 1), $urandom_range(0, NR - 1));
    valid = 1'b0; x = 9'd5; y = 9'd7;
    #1 check(col_sel == '0 && row_sel == '0, "nothing selected when idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
