// tb_tldram_top -- end-to-end test of the TL-DRAM channel at its default size.
//
// tldram_top with all parameters at their defaults: 8 banks of 4 subarrays,
// 512-cell bitlines with a 32-row near segment, 8 x 64-bit columns per row.
// Phases:
//  1. Directed latency: a read to an idle bank that misses is seen on resp_*
//     12 clock edges after the edge that accepted it (lookup 2 + far tRCD 9 +
//     read 1); the same read again hits the near copy: 9 (2 + near tRCD 6 + 1).
//  2. Random reads and writes over every bank, subarray and far row
//     (0 .. 479), first/last rows included.
//  3. Heavy reuse in two subarrays of banks 0 and 1 (40 rows, 4 of them hot):
//     the 32-way near cache overflows, rows are evicted, dirty rows are
//     written back.
// Every read is compared with a reference memory (initial cell pattern, then
// the last write).  Each mechanism must occur at least once and is counted:
// near-segment hit, miss, far-to-near fill, near-to-far write-back, a command
// of another bank issued during an inter-segment transfer, command-bus
// contention, a request held off by its busy bank, the isolation transistor
// on (far access) and off (near access).  The DRAM timing-violation count must
// stay zero.
module tb_tldram_top;
  import tl_pkg::*;

  localparam int NB = 8, SUBS = 4, NR = 32, COLS = 8, W = 64, IDW = 8;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_we = 0;
  logic [2:0] req_bank = '0;
  logic [1:0] req_sub = '0;
  logic [8:0] req_row = '0;
  logic [2:0] req_col = '0;
  logic [W-1:0] req_wdata = '0;
  logic [IDW-1:0] req_id = '0;
  logic resp_valid;
  logic [W-1:0] resp_rdata;
  logic [IDW-1:0] resp_id;
  logic [31:0] n_hit, n_miss, n_fill, n_wb, n_timing_err;
  logic [NB*SUBS-1:0] iso_on;

  tldram_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_rd = 0, n_conc = 0, n_holdoff = 0, n_contend = 0, n_iso_far = 0, n_near_act = 0;
  longint cyc = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] mem [longint];
  logic [W-1:0] expq [int];
  time    acc_t [int];
  int     last_lat = 0;
  function automatic longint key(int b, int s, int r, int c);
    return ((longint'(b * SUBS + s) * 1024) + r) * 16 + c;
  endfunction
  function automatic logic [W-1:0] ref_rd(int b, int s, int r, int c);
    if (mem.exists(key(b, s, r, c))) return mem[key(b, s, r, c)];
    return W'((b * SUBS + s) * 65536 + (NR + r) * 16 + c);
  endfunction

  bit open_b [NB];
  bit xfer_b [NB];
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if ($countones(dut.u_ctrl.b_cmd_req) > 1) n_contend++;
      if (iso_on != '0) n_iso_far++;
      if (resp_valid) begin
        n_rd++;
        check(expq.exists(int'(resp_id)) && resp_rdata == expq[int'(resp_id)],
              $sformatf("read id %0d got %h exp %h (%0d)", resp_id, resp_rdata, expq[int'(resp_id)], expq.exists(int'(resp_id))));
        if (acc_t.exists(int'(resp_id))) last_lat = int'(($time - acc_t[int'(resp_id)]) / 10);
        expq.delete(int'(resp_id));
      end
      if (req_valid && !req_ready) n_holdoff++;
      if (dut.dram_cmd != CMD_NOP) begin
        for (int b = 0; b < NB; b++) if (b != int'(dut.dram_bank) && xfer_b[b]) n_conc++;
        if (dut.dram_cmd == CMD_ACT) begin
          if (open_b[dut.dram_bank]) xfer_b[dut.dram_bank] = 1;
          else if (int'(dut.dram_row) < NR) n_near_act++;
          open_b[dut.dram_bank] = 1;
        end
        if (dut.dram_cmd == CMD_PRE) begin
          open_b[dut.dram_bank] = 0; xfer_b[dut.dram_bank] = 0;
        end
      end
    end
  end

  int next_id = 0;
  task automatic send(int b, int s, int r, int c, bit we, logic [W-1:0] wd);
    int id = next_id;
    next_id = (next_id + 1) % 256;
    @(negedge clk);
    req_valid = 1; req_bank = 3'(b); req_sub = 2'(s); req_row = 9'(r); req_col = 3'(c);
    req_we = we; req_wdata = wd; req_id = IDW'(id);
    if (!we) expq[id] = ref_rd(b, s, r, c);
    else mem[key(b, s, r, c)] = wd;
    // Inputs change at the falling edge; the request is taken at the rising
    // edge that finds req_ready high.
    #1;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    acc_t[id] = $time;
    #1 req_valid = 0;
  endtask

  initial begin
    int b, s, r;
    for (int i = 0; i < NB; i++) begin open_b[i] = 0; xfer_b[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. latency of a miss and of a hit
    send(5, 2, 300, 3, 0, '0);
    repeat (100) @(posedge clk);
    check(last_lat == 12, $sformatf("miss read latency %0d, exp 12", last_lat));
    send(5, 2, 300, 4, 0, '0);
    repeat (100) @(posedge clk);
    check(last_lat == 9, $sformatf("hit read latency %0d, exp 9", last_lat));

    // 2. whole address space
    send(0, 0, 0, 0, 1, 64'h0123_4567_89ab_cdef);
    send(NB - 1, SUBS - 1, 479, 7, 1, 64'hfedc_ba98_7654_3210);
    send(0, 0, 0, 0, 0, '0);
    send(NB - 1, SUBS - 1, 479, 7, 0, '0);
    for (int i = 0; i < 1500; i++) begin
      b = $urandom_range(NB - 1);
      s = $urandom_range(SUBS - 1);
      r = $urandom_range(479);
      send(b, s, r, $urandom_range(COLS - 1), $urandom_range(1), {$urandom, $urandom});
    end

    // 3. reuse beyond the near-segment capacity
    for (int i = 0; i < 2500; i++) begin
      b = $urandom_range(1);
      s = $urandom_range(1);
      r = 100 + $urandom_range(39);
      if ($urandom_range(1)) r = 100 + $urandom_range(3);
      send(b, s, r, $urandom_range(COLS - 1), $urandom_range(2) == 0, {$urandom, $urandom});
    end
    repeat (300) @(posedge clk);

    check(expq.size() == 0, $sformatf("all reads answered, %0d left", expq.size()));
    check(n_timing_err == 0, $sformatf("timing violations %0d", n_timing_err));
    check(n_hit  > 0, "mechanism: near-segment hit");
    check(n_miss > 0, "mechanism: miss to far segment");
    check(n_fill > 0 && n_fill == n_miss, "mechanism: far-to-near transfer per miss");
    check(n_wb   > 0, "mechanism: near-to-far write-back");
    check(n_conc > 0, "mechanism: other bank served during a transfer");
    check(n_contend > 0, "mechanism: command bus contention");
    check(n_holdoff > 0, "mechanism: busy bank holds a request");
    check(n_iso_far > 0, "mechanism: isolation transistor on");
    check(n_near_act > 0, "mechanism: near-segment access with transistor off");
    $display("hits=%0d misses=%0d fills=%0d writebacks=%0d reads=%0d concurrent=%0d contention=%0d holdoff=%0d near_acts=%0d cycles=%0d",
             n_hit, n_miss, n_fill, n_wb, n_rd, n_conc, n_contend, n_holdoff, n_near_act, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
