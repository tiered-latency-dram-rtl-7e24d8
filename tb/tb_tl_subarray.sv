// tb_tl_subarray -- self-checking test of the TL-DRAM subarray model.
//
// Drives commands (two cycles apart unless padded) and checks: the initial cell pattern read
// through the sense amplifiers; the isolation transistor off for near rows and
// on for far rows; a write reaching the cells; the far-to-near and near-to-far
// transfers copying a whole row; and the segment timing, by issuing each
// command exactly at its earliest legal cycle (no error expected) and one cycle
// earlier (error expected): near tRCD 6 / tRAS 12 / tRP 7, far tRCD 9 /
// tRAS 36 / tRP 17, transfer PRE at far tRAS + 4 cycles.  A transfer within one
// segment must be flagged.
module tb_tl_subarray;
  import tl_pkg::*;

  localparam int ROWS = 512, NR = 32, COLS = 8, W = 64, ID = 3;

  logic clk = 0, rst_n = 0;
  cmd_e cmd = CMD_NOP;
  logic [8:0] row = '0;
  logic [2:0] col = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic rvalid, row_open, iso_on, terr;
  int checks = 0, failures = 0;

  tl_subarray #(.ROWS(ROWS), .NROWS(NR), .COLS(COLS), .WBITS(W), .INIT_ID(ID)) dut (
    .clk, .rst_n, .cmd, .row, .col, .wdata, .rdata, .rvalid, .row_open, .iso_on,
    .timing_err(terr));

  always #5 clk = ~clk;

  function automatic logic [W-1:0] pat(int r, int c);
    return W'(ID * 65536 + r * 16 + c);
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // One command in one cycle; returns with its results visible.
  task automatic issue(cmd_e c, int r = 0, int cl = 0, logic [W-1:0] wd = '0, bit expect_err = 0,
                       string what = "");
    @(negedge clk);
    cmd = c; row = 9'(r); col = 3'(cl); wdata = wd;
    @(negedge clk);
    cmd = CMD_NOP;
    check(terr == expect_err, $sformatf("%s: timing_err=%0d expected %0d", what, terr, expect_err));
  endtask

  task automatic nop(int n);
    repeat (n) @(negedge clk);
  endtask

  initial begin
    nop(3); rst_n = 1; nop(2);

    // Far row access: tRCD 9, tRAS 36.
    issue(CMD_ACT, 100, 0, '0, 0, "ACT far");
    check(iso_on == 1 && row_open == 1, "isolation transistor on for far row");
    nop(6);                                   // next command at cycle 8 after ACT
    issue(CMD_RD, 0, 3, '0, 1, "RD far at tRCD-1");
    issue(CMD_RD, 0, 3, '0, 0, "RD far at tRCD");
    check(rvalid && rdata == pat(100, 3), $sformatf("far read %h", rdata));
    issue(CMD_WR, 0, 5, 64'hdead_beef_0000_0005, 0, "WR far");
    // RD at 8 and 10, WR at 12; transfer ACT at 35
    nop(21);
    issue(CMD_ACT, 5, 0, '0, 1, "transfer ACT at far tRAS-1");
    // The early transfer was flagged but still copied; do it again legally on a fresh row.
    issue(CMD_PRE, 0, 0, '0, 1, "PRE too early after transfer");
    nop(16);                                  // PRE at c, next ACT at c+18
    issue(CMD_ACT, 200, 0, '0, 0, "ACT far after far tRP");
    check(iso_on == 1, "iso on far");
    nop(8);
    issue(CMD_WR, 0, 1, 64'h1111_2222_3333_4444, 0, "WR far row 200");
    nop(25);                                  // ACT at 0, WR at 10, transfer at 37
    issue(CMD_ACT, 7, 0, '0, 0, "transfer far->near at far tRAS");
    // transfer ACT at 37, PRE at 39 (legal from 40)
    issue(CMD_PRE, 0, 0, '0, 1, "PRE at far tRAS+3");
    // The PRE above closed the row anyway; wait far tRP and open the near copy.
    nop(14);
    issue(CMD_ACT, 7, 0, '0, 1, "ACT at far tRP-1");
    issue(CMD_PRE, 0, 0, '0, 1, "PRE right after ACT (before near tRAS)");
    nop(5);                                   // PRE at c (near), ACT at c+7
    issue(CMD_ACT, 7, 0, '0, 0, "ACT near after near tRP");
    check(iso_on == 0 && row_open == 1, "isolation transistor off for near row");
    nop(3);
    issue(CMD_RD, 0, 1, '0, 1, "RD near at tRCD-1");
    issue(CMD_RD, 0, 1, '0, 0, "RD near at tRCD");
    check(rdata == 64'h1111_2222_3333_4444, $sformatf("near copy col1 %h", rdata));
    issue(CMD_RD, 0, 0, '0, 0, "RD near col0");
    check(rdata == pat(200, 0), $sformatf("near copy col0 %h", rdata));
    issue(CMD_RD, 0, 5, '0, 0, "RD near col5");
    check(rdata == pat(200, 5), $sformatf("near copy col5 %h", rdata));
    // RDs at 5, 7, 9, 11; PRE at 13
    issue(CMD_PRE, 0, 0, '0, 0, "PRE near after tRAS");
    nop(6);
    // Near -> far transfer (write-back): ACT near 7, at near tRAS ACT far 300.
    issue(CMD_ACT, 7, 0, '0, 0, "ACT near src");
    nop(8);
    issue(CMD_ACT, 300, 0, '0, 1, "transfer near->far at near tRAS-1");
    issue(CMD_PRE, 0, 0, '0, 1, "PRE after early transfer");
    nop(15);
    issue(CMD_ACT, 7, 0, '0, 0, "ACT near src again");
    nop(10);
    issue(CMD_ACT, 300, 0, '0, 0, "transfer near->far at near tRAS");
    check(iso_on == 1, "iso on during transfer");
    nop(26);                                  // ACT at 0, second ACT at 12, PRE at 40
    issue(CMD_PRE, 0, 0, '0, 0, "PRE after transfer at far tRAS+4");
    nop(16);
    issue(CMD_ACT, 300, 0, '0, 0, "ACT far copy");
    nop(8);
    issue(CMD_RD, 0, 1, '0, 0, "RD far copy col1");
    check(rdata == 64'h1111_2222_3333_4444, $sformatf("far copy col1 %h", rdata));
    issue(CMD_RD, 0, 6, '0, 0, "RD far copy col6");
    check(rdata == pat(200, 6), $sformatf("far copy col6 %h", rdata));
    nop(25);                                  // RDs at 10, 12; ACT at 39
    issue(CMD_ACT, 400, 0, '0, 1, "transfer within far segment");
    nop(4);
    issue(CMD_PRE, 0, 0, '0, 0, "PRE");
    nop(20);
    // Row 100 kept the earlier write.
    issue(CMD_ACT, 100, 0, '0, 0, "ACT far 100");
    nop(8);
    issue(CMD_RD, 0, 5, '0, 0, "RD far 100 col5");
    check(rdata == 64'hdead_beef_0000_0005, $sformatf("write kept %h", rdata));

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
