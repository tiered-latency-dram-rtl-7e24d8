// tb_near_seg_tags -- self-checking test of the near-segment tag store.
//
// Runs a random stream of lookups over a small tag store (2 subarrays, 4 ways,
// rows drawn from 12 values so that hits, misses and evictions all occur).  A
// hit is followed by a hit update (random dirty), a miss by a fill of the
// named victim.  A reference model kept here (valid/dirty/tag/benefit arrays,
// victim = first invalid way, else least benefit, lowest way on a tie; benefit
// +1 per hit, all halved on overflow) predicts hit, way, victim and the
// victim's valid/dirty/tag for every lookup.
module tb_near_seg_tags;

  localparam int SUBS = 2, NW = 4, TAGW = 9, BENW = 4, OPS = 3000;

  logic clk = 0, rst_n = 0;
  logic [0:0] lk_sub = '0, upd_sub = '0;
  logic [TAGW-1:0] lk_row = '0, upd_tag = '0, vic_tag;
  logic lk_hit, vic_valid, vic_dirty;
  logic [1:0] lk_way, vic_way, upd_way = '0;
  logic upd_hit = 0, upd_fill = 0, upd_dirty = 0;
  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_evict = 0, n_age = 0;

  near_seg_tags #(.SUBS(SUBS), .NWAYS(NW), .TAGW(TAGW), .BENW(BENW)) dut (.*);

  always #5 clk = ~clk;

  bit       m_v [SUBS][NW];
  bit       m_d [SUBS][NW];
  int       m_t [SUBS][NW];
  int       m_b [SUBS][NW];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    int s, r, ew, vw, best;
    bit eh;
    for (int i = 0; i < SUBS; i++) for (int j = 0; j < NW; j++) begin
      m_v[i][j] = 0; m_d[i][j] = 0; m_t[i][j] = 0; m_b[i][j] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int op = 0; op < OPS; op++) begin
      s = $urandom_range(SUBS - 1);
      r = 100 + $urandom_range(11);
      lk_sub = 1'(s); lk_row = TAGW'(r);
      upd_hit = 0; upd_fill = 0;
      #1;
      // reference
      eh = 0; ew = 0;
      for (int w = 0; w < NW; w++) if (!eh && m_v[s][w] && m_t[s][w] == r) begin eh = 1; ew = w; end
      vw = -1; best = 1 << BENW;
      for (int w = 0; w < NW; w++) if (vw < 0 && !m_v[s][w]) vw = w;
      if (vw < 0) for (int w = 0; w < NW; w++) if (m_b[s][w] < best) begin best = m_b[s][w]; vw = w; end
      check(lk_hit == eh, $sformatf("op %0d hit %0d exp %0d", op, lk_hit, eh));
      if (eh) check(lk_way == 2'(ew), $sformatf("op %0d way %0d exp %0d", op, lk_way, ew));
      check(vic_way == 2'(vw), $sformatf("op %0d victim %0d exp %0d", op, vic_way, vw));
      check(vic_valid == m_v[s][vw] && vic_dirty == m_d[s][vw] &&
            (!m_v[s][vw] || vic_tag == TAGW'(m_t[s][vw])), $sformatf("op %0d victim state", op));
      upd_sub = 1'(s);
      if (eh) begin
        n_hit++;
        upd_hit = 1; upd_way = 2'(ew); upd_dirty = 1'($urandom_range(1));
        if (m_b[s][ew] == (1 << BENW) - 1) begin
          n_age++;
          for (int w = 0; w < NW; w++) m_b[s][w] = m_b[s][w] / 2;
        end
        m_b[s][ew]++;
        if (upd_dirty) m_d[s][ew] = 1;
      end else begin
        n_miss++;
        if (m_v[s][vw]) n_evict++;
        upd_fill = 1; upd_way = 2'(vw); upd_tag = TAGW'(r); upd_dirty = 0;
        m_v[s][vw] = 1; m_d[s][vw] = 0; m_t[s][vw] = r; m_b[s][vw] = 1;
      end
      @(negedge clk);
    end
    upd_hit = 0; upd_fill = 0;
    check(n_hit > 100 && n_miss > 100 && n_evict > 50 && n_age > 0,
          $sformatf("coverage hit=%0d miss=%0d evict=%0d age=%0d", n_hit, n_miss, n_evict, n_age));
    $display("hits=%0d misses=%0d evictions=%0d ageings=%0d", n_hit, n_miss, n_evict, n_age);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (OPS * 2 + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
