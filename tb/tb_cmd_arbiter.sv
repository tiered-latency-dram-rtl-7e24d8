// tb_cmd_arbiter -- self-checking test of the round-robin command-bus arbiter.
//
// Drives random request vectors to a 4-way arbiter and compares every grant
// with a reference round-robin model (search starts after the last granted
// requester).  Also checks that with all four requesting for 8 cycles each
// requester is granted exactly twice, and that no request means no grant.
module tb_cmd_arbiter;

  localparam int N = 4, CYC = 2000;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] req = '0, gnt;
  logic [1:0] gnt_idx;
  int checks = 0, failures = 0;
  int last = N - 1;
  int cnt [N];

  cmd_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic step(logic [N-1:0] r);
    logic [N-1:0] eg;
    int k;
    req = r;
    #1;
    eg = '0;
    for (int i = 1; i <= N; i++) begin
      k = (last + i) % N;
      if (eg == '0 && r[k]) eg[k] = 1'b1;
    end
    check(gnt == eg, $sformatf("req %b gnt %b exp %b", r, gnt, eg));
    if (eg != '0) begin
      for (int i = 0; i < N; i++) if (eg[i]) begin last = i; cnt[i]++; end
      check(gnt_idx == 2'(last), "gnt_idx");
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    step('0);
    for (int i = 0; i < N; i++) cnt[i] = 0;
    for (int c = 0; c < 8; c++) step('1);
    for (int i = 0; i < N; i++) check(cnt[i] == 2, $sformatf("fair share %0d got %0d", i, cnt[i]));
    for (int c = 0; c < CYC; c++) step(N'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (CYC + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
