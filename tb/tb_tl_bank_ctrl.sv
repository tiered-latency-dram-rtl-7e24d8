// tb_tl_bank_ctrl -- self-checking test of the per-bank controller.
//
// One tl_bank_ctrl drives one tl_bank model (2 subarrays of 64 rows, 4 of them
// near).  Requests to 10 far rows per subarray keep the near cache under
// pressure, so hits, clean misses with fills and dirty misses with write-backs
// all happen.  Checks:
//  * every read returns the value a reference memory predicts (initial cell
//    pattern, then the last write), through fills and write-backs;
//  * the bank model never reports a timing violation;
//  * with the bus always granted and requests always waiting, the spacing of
//    successive row accesses (ACT to ACT) is 19 cycles after a near-segment
//    hit (tRC 23.1 ns at 1.25 ns) and 57 cycles after a far access with its
//    fill or after a write-back (tRC 65.8 ns + 4 ns transfer);
//  * a second phase grants the bus only at random and checks data again.
module tb_tl_bank_ctrl;
  import tl_pkg::*;

  localparam int SUBS = 2, ROWS = 64, NR = 4, COLS = 8, W = 64, IDW = 8;
  localparam int NREQ = 400;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_we = 0;
  logic [0:0] req_sub = '0;
  logic [5:0] req_row = '0;
  logic [2:0] req_col = '0;
  logic [W-1:0] req_wdata = '0;
  logic [IDW-1:0] req_id = '0;
  logic cmd_req, cmd_gnt;
  cmd_e cmd;
  logic [0:0] cmd_sub;
  logic [5:0] cmd_row;
  logic [2:0] cmd_col;
  logic [W-1:0] cmd_wdata;
  logic bank_rvalid, resp_valid;
  logic [W-1:0] bank_rdata, resp_rdata;
  logic [IDW-1:0] resp_id;
  logic ev_hit, ev_miss, ev_fill, ev_wb;
  logic [SUBS-1:0] iso_on;
  logic terr;
  bit   rand_gnt = 0;
  logic gnt_coin = 1;

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_fill = 0, n_wb = 0, n_terr = 0, n_rd = 0;

  tl_bank_ctrl #(.SUBS(SUBS), .ROWS(ROWS), .NROWS(NR), .COLS(COLS), .WBITS(W), .IDW(IDW)) dut (.*);

  tl_bank #(.SUBS(SUBS), .ROWS(ROWS), .NROWS(NR), .COLS(COLS), .WBITS(W), .BANK_ID(0)) u_bank (
    .clk, .rst_n, .cmd(cmd_req && cmd_gnt ? cmd : CMD_NOP), .sub(cmd_sub), .row(cmd_row),
    .col(cmd_col), .wdata(cmd_wdata), .rdata(bank_rdata), .rvalid(bank_rvalid), .iso_on,
    .timing_err(terr));

  assign cmd_gnt = cmd_req && (!rand_gnt || gnt_coin);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // Reference memory: key = sub*4096 + row*16 + col.
  logic [W-1:0] mem [int];
  logic [W-1:0] expq [int];   // expected read data by id
  function automatic logic [W-1:0] ref_rd(int s, int r, int c);
    int k = s * 4096 + r * 16 + c;
    if (mem.exists(k)) return mem[k];
    return W'(s * 65536 + (NR + r) * 16 + c);   // tl_subarray initial pattern
  endfunction

  // Event and timing monitor.
  int cyc = 0, last_act = -1;
  typedef enum {K_NONE, K_HIT, K_FAR} kind_e;
  kind_e last_kind = K_NONE, cur_kind = K_NONE;
  bit    bank_open = 0;
  int    n_gap_near = 0, n_gap_far = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      gnt_coin <= 1'($urandom_range(1));
      if (ev_hit)  begin n_hit++;  cur_kind = K_HIT; end
      if (ev_miss) begin n_miss++; cur_kind = K_FAR; end
      if (ev_fill) n_fill++;
      if (ev_wb)   n_wb++;
      if (terr)    begin n_terr++; check(0, $sformatf("timing violation at cycle %0d", cyc)); end
      if (resp_valid) begin
        n_rd++;
        check(expq.exists(int'(resp_id)) && resp_rdata == expq[int'(resp_id)],
              $sformatf("read id %0d got %h exp %h", resp_id, resp_rdata, expq[int'(resp_id)]));
        expq.delete(int'(resp_id));
      end
      if (cmd_req && cmd_gnt && cmd == CMD_ACT && !bank_open) begin
        // first ACT of a row access (write-back or access)
        if (!rand_gnt && last_act >= 0) begin
          if (last_kind == K_HIT) begin
            n_gap_near++;
            check(cyc - last_act == 19, $sformatf("near ACT-ACT %0d, exp 19", cyc - last_act));
          end else begin
            n_gap_far++;
            check(cyc - last_act == 57, $sformatf("far ACT-ACT %0d, exp 57", cyc - last_act));
          end
        end
        last_act  = cyc;
        // A near-row ACT on a miss is a write-back: far spacing follows it.
        last_kind = (cur_kind == K_FAR || int'(cmd_row) >= NR) ? K_FAR : K_HIT;
        bank_open = 1;
      end else if (cmd_req && cmd_gnt && cmd == CMD_PRE) begin
        bank_open = 0;
      end
    end
  end

  task automatic send(int s, int r, int c, bit we, logic [W-1:0] wd, int id);
    @(negedge clk);
    req_valid = 1; req_sub = 1'(s); req_row = 6'(r); req_col = 3'(c); req_we = we;
    req_wdata = wd; req_id = IDW'(id);
    if (!we) expq[id] = ref_rd(s, r, c);
    else mem[s * 4096 + r * 16 + c] = wd;
    // Inputs change at the falling edge; the request is taken at the rising
    // edge that finds req_ready high.
    #1;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
  endtask

  task automatic run(int n, int id0);
    for (int i = 0; i < n; i++) begin
      int s = $urandom_range(SUBS - 1);
      int r = $urandom_range(9);
      int c = $urandom_range(COLS - 1);
      bit we = ($urandom_range(2) == 0);
      // Reuse: half the time go back to one of three hot rows.
      if ($urandom_range(1)) r = $urandom_range(2);
      send(s, r, c, we, {$urandom, $urandom}, (id0 + i) % 256);
    end
    repeat (200) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(NREQ, 0);
    check(expq.size() == 0, "all reads answered (phase 1)");
    rand_gnt = 1;
    run(NREQ / 2, 100);
    check(expq.size() == 0, "all reads answered (phase 2)");
    check(n_hit > 20 && n_miss > 20 && n_wb > 5, $sformatf("coverage hit=%0d miss=%0d wb=%0d", n_hit, n_miss, n_wb));
    check(n_fill == n_miss, $sformatf("fills %0d == misses %0d", n_fill, n_miss));
    check(n_gap_near > 10 && n_gap_far > 10, $sformatf("timed gaps near=%0d far=%0d", n_gap_near, n_gap_far));
    check(n_rd > 50, "reads");
    $display("hits=%0d misses=%0d fills=%0d writebacks=%0d reads=%0d gaps near=%0d far=%0d",
             n_hit, n_miss, n_fill, n_wb, n_rd, n_gap_near, n_gap_far);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
