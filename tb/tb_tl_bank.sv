// tb_tl_bank -- self-checking test of the TL-DRAM bank model.
//
// A bank of 4 subarrays (64 rows, 4 near).  Checks that a command reaches only
// the subarray it names (reads return that subarray's initial pattern, writes
// land there and nowhere else), that iso_on shows the isolation transistors
// of the addressed subarray on for a far row and off for a near row, that a
// transfer in one subarray copies a row there only, that read data arrives
// one cycle after RD, and that a subarray's timing violation shows on the
// bank's timing_err.
module tb_tl_bank;
  import tl_pkg::*;

  localparam int SUBS = 4, ROWS = 64, NR = 4, COLS = 8, W = 64, BID = 2;

  logic clk = 0, rst_n = 0;
  cmd_e cmd = CMD_NOP;
  logic [1:0] sub = '0;
  logic [5:0] row = '0;
  logic [2:0] col = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic rvalid, terr;
  logic [SUBS-1:0] iso_on;
  int checks = 0, failures = 0;

  tl_bank #(.SUBS(SUBS), .ROWS(ROWS), .NROWS(NR), .COLS(COLS), .WBITS(W), .BANK_ID(BID)) dut (
    .clk, .rst_n, .cmd, .sub, .row, .col, .wdata, .rdata, .rvalid, .iso_on, .timing_err(terr));

  always #5 clk = ~clk;

  function automatic logic [W-1:0] pat(int s, int r, int c);
    return W'((BID * SUBS + s) * 65536 + r * 16 + c);
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Issue one command at the next negedge; it is sampled at the following posedge.
  task automatic issue(cmd_e c, int s = 0, int r = 0, int cl = 0, logic [W-1:0] wd = '0);
    @(negedge clk);
    cmd = c; sub = 2'(s); row = 6'(r); col = 3'(cl); wdata = wd;
    @(negedge clk);
    cmd = CMD_NOP;
  endtask

  // Open row r of subarray s, read column c, close: a complete legal access.
  task automatic access_rd(int s, int r, int c, logic [W-1:0] exp, string what);
    issue(CMD_ACT, s, r);
    check(iso_on == ((r >= NR) ? SUBS'(1 << s) : '0), $sformatf("%s iso_on %b", what, iso_on));
    repeat (10) @(negedge clk);
    issue(CMD_RD, s, 0, c);
    check(rvalid && rdata == exp, $sformatf("%s read %h exp %h", what, rdata, exp));
    check(!terr, $sformatf("%s timing", what));
    repeat (40) @(negedge clk);
    issue(CMD_PRE, s);
    repeat (20) @(negedge clk);
    check(iso_on == '0, $sformatf("%s iso off after PRE", what));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int s = 0; s < SUBS; s++) access_rd(s, 10 + s, s, pat(s, 10 + s, s), $sformatf("sub%0d far", s));
    access_rd(1, 2, 7, pat(1, 2, 7), "sub1 near");
    // Write to sub 2 row 20 col 4; the same address in sub 3 is untouched.
    issue(CMD_ACT, 2, 20);
    repeat (10) @(negedge clk);
    issue(CMD_WR, 2, 0, 4, 64'hcafe_f00d_1234_5678);
    check(!rvalid, "no read data after WR");
    repeat (40) @(negedge clk);
    issue(CMD_PRE, 2);
    repeat (20) @(negedge clk);
    access_rd(2, 20, 4, 64'hcafe_f00d_1234_5678, "sub2 written");
    access_rd(3, 20, 4, pat(3, 20, 4), "sub3 untouched");
    // Transfer far row 30 -> near row 1 in sub 0.
    issue(CMD_ACT, 0, 30);
    repeat (40) @(negedge clk);
    issue(CMD_ACT, 0, 1);
    check(iso_on == 4'b0001, "iso on during transfer");
    repeat (6) @(negedge clk);
    issue(CMD_PRE, 0);
    check(!terr, "transfer timing");
    repeat (20) @(negedge clk);
    access_rd(0, 1, 6, pat(0, 30, 6), "sub0 near copy");
    access_rd(1, 1, 6, pat(1, 1, 6), "sub1 near untouched");
    // Too-early RD in sub 3 is flagged.
    issue(CMD_ACT, 3, 40);
    issue(CMD_RD, 3, 0, 0);
    check(terr, "timing_err from subarray");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
