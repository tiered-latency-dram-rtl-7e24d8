// tb_tl_mem_ctrl -- self-checking test of the multi-bank memory controller.
//
// tl_mem_ctrl with 4 banks drives 4 tl_bank models (2 subarrays of 64 rows,
// 4 near) built here on its command bus.  Random reads and writes to 14 far
// rows per subarray (two of them hot) run through it.  Checks: every read returns the
// reference memory's value with its id; no bank sees a timing violation; at
// most one command per cycle; a request to a busy bank is held off (ready low)
// while other banks accept; and commands of other banks are issued while a
// bank is between the two ACTs and the PRE of an inter-segment transfer (the
// transfer does not block the channel), counted and required to occur.
module tb_tl_mem_ctrl;
  import tl_pkg::*;

  localparam int NB = 4, SUBS = 2, ROWS = 64, NR = 4, COLS = 8, W = 64, IDW = 8;
  localparam int NREQ = 600;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_we = 0;
  logic [1:0] req_bank = '0;
  logic [0:0] req_sub = '0;
  logic [5:0] req_row = '0;
  logic [2:0] req_col = '0;
  logic [W-1:0] req_wdata = '0;
  logic [IDW-1:0] req_id = '0;
  logic resp_valid;
  logic [W-1:0] resp_rdata;
  logic [IDW-1:0] resp_id;
  cmd_e dram_cmd;
  logic [1:0] dram_bank;
  logic [0:0] dram_sub;
  logic [5:0] dram_row;
  logic [2:0] dram_col;
  logic [W-1:0] dram_wdata, dram_rdata;
  logic dram_rvalid;
  logic [NB-1:0] ev_hit, ev_miss, ev_fill, ev_wb;

  tl_mem_ctrl #(.NB(NB), .SUBS(SUBS), .ROWS(ROWS), .NROWS(NR), .COLS(COLS), .WBITS(W), .IDW(IDW)) dut (.*);

  logic [NB-1:0] bk_rvalid, bk_err;
  logic [W-1:0]  bk_rdata [NB];
  logic [SUBS-1:0] bk_iso [NB];
  for (genvar b = 0; b < NB; b++) begin : g_bank
    tl_bank #(.SUBS(SUBS), .ROWS(ROWS), .NROWS(NR), .COLS(COLS), .WBITS(W), .BANK_ID(b)) u_bank (
      .clk, .rst_n, .cmd(int'(dram_bank) == b ? dram_cmd : CMD_NOP), .sub(dram_sub),
      .row(dram_row), .col(dram_col), .wdata(dram_wdata), .rdata(bk_rdata[b]),
      .rvalid(bk_rvalid[b]), .iso_on(bk_iso[b]), .timing_err(bk_err[b]));
  end
  always_comb begin
    dram_rdata = '0;
    for (int b = 0; b < NB; b++) if (bk_rvalid[b]) dram_rdata = bk_rdata[b];
  end
  assign dram_rvalid = |bk_rvalid;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_fill = 0, n_wb = 0, n_rd = 0, n_conc = 0, n_holdoff = 0, n_contend = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] mem [int];
  logic [W-1:0] expq [int];
  function automatic logic [W-1:0] ref_rd(int b, int s, int r, int c);
    int k = ((b * SUBS + s) * 4096) + r * 16 + c;
    if (mem.exists(k)) return mem[k];
    return W'((b * SUBS + s) * 65536 + (NR + r) * 16 + c);
  endfunction

  bit open_b [NB];
  bit xfer_b [NB];
  always @(posedge clk) begin
    if (rst_n) begin
      n_hit  += $countones(ev_hit);
      n_miss += $countones(ev_miss);
      n_fill += $countones(ev_fill);
      n_wb   += $countones(ev_wb);
      if ($countones(dut.b_cmd_req) > 1) n_contend++;
      if (bk_err != '0) check(0, "timing violation");
      if (resp_valid) begin
        n_rd++;
        check(expq.exists(int'(resp_id)) && resp_rdata == expq[int'(resp_id)],
              $sformatf("read id %0d got %h", resp_id, resp_rdata));
        expq.delete(int'(resp_id));
      end
      if (req_valid && !req_ready) n_holdoff++;
      if (dram_cmd != CMD_NOP) begin
        for (int b = 0; b < NB; b++) if (b != int'(dram_bank) && xfer_b[b]) n_conc++;
        if (dram_cmd == CMD_ACT) begin
          if (open_b[dram_bank]) xfer_b[dram_bank] = 1;
          open_b[dram_bank] = 1;
        end
        if (dram_cmd == CMD_PRE) begin open_b[dram_bank] = 0; xfer_b[dram_bank] = 0; end
      end
    end
  end

  int next_id = 0;
  task automatic send(int b, int s, int r, int c, bit we, logic [W-1:0] wd);
    int id = next_id;
    next_id = (next_id + 1) % 256;
    @(negedge clk);
    req_valid = 1; req_bank = 2'(b); req_sub = 1'(s); req_row = 6'(r); req_col = 3'(c);
    req_we = we; req_wdata = wd; req_id = IDW'(id);
    if (!we) expq[id] = ref_rd(b, s, r, c);
    else mem[((b * SUBS + s) * 4096) + r * 16 + c] = wd;
    // Inputs change at the falling edge; the request is taken at the rising
    // edge that finds req_ready high.
    #1;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
  endtask

  initial begin
    for (int b = 0; b < NB; b++) begin open_b[b] = 0; xfer_b[b] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NREQ; i++) begin
      int r;
      r = 4 + $urandom_range(11);
      if ($urandom_range(2) == 0) r = $urandom_range(1);
      send($urandom_range(NB - 1), $urandom_range(SUBS - 1), r, $urandom_range(COLS - 1),
           $urandom_range(2) == 0, {$urandom, $urandom});
    end
    repeat (300) @(posedge clk);
    check(expq.size() == 0, $sformatf("all reads answered, %0d left", expq.size()));
    check(n_hit > 50 && n_miss > 50 && n_wb > 5 && n_fill == n_miss,
          $sformatf("coverage hit=%0d miss=%0d fill=%0d wb=%0d", n_hit, n_miss, n_fill, n_wb));
    check(n_conc > 20, $sformatf("commands during another bank's transfer: %0d", n_conc));
    check(n_holdoff > 0, "busy bank held a request");
    check(n_contend > 0, "command bus contention");
    $display("hits=%0d misses=%0d fills=%0d wb=%0d reads=%0d concurrent=%0d holdoff=%0d contention=%0d",
             n_hit, n_miss, n_fill, n_wb, n_rd, n_conc, n_holdoff, n_contend);
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
