// tb_near_size_sweep -- the same request stream run on TL-DRAM channels whose
// near segments differ in size.
//
// Four tldram_top copies (2 banks, 1 subarray each, 512-cell bitlines) have
// near segments of 1, 8, 32 and 128 rows.  All four receive identical
// requests in lockstep (a request is presented until every copy has taken
// it).  The stream touches 48 far rows
// per bank, half of the requests going to 6 hot rows.  Checks:
//  * every read of every copy returns what a reference memory predicts;
//  * no copy ever breaks the DRAM timing of either segment;
//  * near-segment hits never decrease as the near segment grows, and the
//    largest segment hits more often than the smallest;
//  * with 128 near rows every touched row fits, so each row misses exactly
//    once (compulsory misses only) and nothing is ever written back.
// The timing constants are those of the 32-row segment for every size; only
// the cache capacity changes here.
module tb_near_size_sweep;
  import tl_pkg::*;

  localparam int NC = 4, NB = 2, W = 64, IDW = 8, NREQ = 1500, NROWS_WS = 48;
  localparam int SIZES [NC] = '{1, 8, 32, 128};

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_we = 0;
  logic [0:0] req_bank = '0;
  logic [8:0] req_row = '0;
  logic [2:0] req_col = '0;
  logic [W-1:0] req_wdata = '0;
  logic [IDW-1:0] req_id = '0;

  logic [NC-1:0] rdy, rv, took;
  logic [W-1:0]  rd  [NC];
  logic [IDW-1:0] rid [NC];
  logic [31:0] hit [NC], miss [NC], fill [NC], wb [NC], terr [NC];

  for (genvar i = 0; i < NC; i++) begin : g_cfg
    localparam int FW = $clog2(512 - SIZES[i]);
    logic [NB-1:0] iso;
    tldram_top #(.NB(NB), .SUBS(1), .NROWS(SIZES[i])) u_top (
      .clk, .rst_n, .req_valid(req_valid && !took[i]), .req_ready(rdy[i]), .req_bank,
      .req_sub(1'b0), .req_row(req_row[FW-1:0]), .req_col, .req_we, .req_wdata, .req_id,
      .resp_valid(rv[i]), .resp_rdata(rd[i]), .resp_id(rid[i]), .n_hit(hit[i]),
      .n_miss(miss[i]), .n_fill(fill[i]), .n_wb(wb[i]), .n_timing_err(terr[i]), .iso_on(iso));
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] mem [int];
  logic [W-1:0] expq [NC][int];
  bit touched [int];

  // Initial cell pattern of far row r (logical) in bank b for near size n.
  function automatic logic [W-1:0] ref_rd(int b, int r, int c, int n);
    int k = (b * 1024 + r) * 16 + c;
    if (mem.exists(k)) return mem[k];
    return W'(longint'(b * 65536 + (n + r) * 16 + c));
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < NC; i++) begin
        if (req_valid && !took[i] && rdy[i]) took[i] <= 1'b1;
        if (rv[i]) begin
          check(expq[i].exists(int'(rid[i])) && rd[i] == expq[i][int'(rid[i])],
                $sformatf("size %0d read id %0d got %h", SIZES[i], rid[i], rd[i]));
          expq[i].delete(int'(rid[i]));
        end
      end
    end
  end

  task automatic send(int b, int r, int c, bit we, logic [W-1:0] wd, int id);
    @(negedge clk);
    took = '0;
    req_valid = 1; req_bank = 1'(b); req_row = 9'(r); req_col = 3'(c);
    req_we = we; req_wdata = wd; req_id = IDW'(id);
    for (int i = 0; i < NC; i++) if (!we) expq[i][id] = ref_rd(b, r, c, SIZES[i]);
    if (we) mem[(b * 1024 + r) * 16 + c] = wd;
    touched[b * 1024 + r] = 1;
    // Each copy takes the request at a rising edge that finds it ready; hold
    // it until all four have.
    #1;
    while (took != '1) @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    int r;
    took = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NREQ; i++) begin
      r = 200 + $urandom_range(NROWS_WS - 1);
      if ($urandom_range(1) != 0) r = 200 + $urandom_range(5);
      send($urandom_range(NB - 1), r, $urandom_range(7), $urandom_range(3) == 0, {$urandom, $urandom}, i % 256);
    end
    repeat (300) @(posedge clk);
    for (int i = 0; i < NC; i++) begin
      check(expq[i].size() == 0, $sformatf("size %0d: %0d reads unanswered", SIZES[i], expq[i].size()));
      check(terr[i] == 0, $sformatf("size %0d: %0d timing violations", SIZES[i], terr[i]));
      check(hit[i] + miss[i] == NREQ, $sformatf("size %0d: hits+misses %0d", SIZES[i], hit[i] + miss[i]));
      if (i > 0) check(hit[i] >= hit[i-1], $sformatf("hits fall from size %0d to %0d", SIZES[i-1], SIZES[i]));
      $display("near rows %3d: hits %4d misses %4d write-backs %4d", SIZES[i], hit[i], miss[i], wb[i]);
    end
    check(hit[NC-1] > hit[0], "largest near segment hits more than smallest");
    check(miss[NC-1] == touched.num(), $sformatf("128 rows: misses %0d, rows touched %0d", miss[NC-1], touched.num()));
    check(wb[NC-1] == 0, "128 rows: no write-back needed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
