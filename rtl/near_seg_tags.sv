// near_seg_tags -- tag store and replacement choice of the near-segment cache.
//
// The memory controller uses the near segment of each subarray as a
// hardware-managed cache for the far segment of the same subarray (a row can
// only be copied over the bitlines it shares).  Each subarray has NWAYS entries,
// one per near row, holding {valid, dirty, tag = far-row index, benefit}.  The
// cache is fully associative within the subarray.
//
// Lookup (combinational): lk_sub/lk_row give lk_hit and lk_way.  For the same
// subarray the store also names a victim way: the first invalid entry, or else
// the valid entry of smallest benefit (lowest way on a tie), with its tag and
// dirty bit for a write-back.
// Updates (registered, at most one per cycle):
//   upd_hit  : benefit of (upd_sub, upd_way) +1; dirty set if upd_dirty.  When a
//              counter would overflow, all counters of that subarray are
//              halved first (ageing), so old reuse fades.
//   upd_fill : the entry becomes valid and clean with tag upd_tag, benefit 1.
// The benefit counter stands for the "benefit" the paper's Benefit-Based
// Caching policy ranks rows by; the paper names the policy but does not give
// its rules here, so insertion on every miss, benefit = access count and
// ageing by halving are this design's own simple choice.
module near_seg_tags #(
  parameter int unsigned SUBS     = tl_pkg::SUBARRAYS,
  parameter int unsigned NWAYS    = tl_pkg::NEAR_ROWS,
  parameter int unsigned TAGW     = 9,
  parameter int unsigned BENW     = 4,
  localparam int unsigned SW      = (SUBS  > 1) ? $clog2(SUBS)  : 1,
  localparam int unsigned WW      = (NWAYS > 1) ? $clog2(NWAYS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // lookup
  input  logic [SW-1:0]   lk_sub,
  input  logic [TAGW-1:0] lk_row,
  output logic            lk_hit,
  output logic [WW-1:0]   lk_way,
  output logic [WW-1:0]   vic_way,
  output logic            vic_valid,
  output logic            vic_dirty,
  output logic [TAGW-1:0] vic_tag,
  // update
  input  logic            upd_hit,
  input  logic            upd_fill,
  input  logic [SW-1:0]   upd_sub,
  input  logic [WW-1:0]   upd_way,
  input  logic            upd_dirty,
  input  logic [TAGW-1:0] upd_tag
);

  typedef struct packed {
    logic            valid;
    logic            dirty;
    logic [TAGW-1:0] tag;
    logic [BENW-1:0] ben;
  } entry_t;

  entry_t ent [SUBS][NWAYS];

  // Lookup and victim choice.
  always_comb begin
    logic            found_inv;
    logic [BENW-1:0] best;
    lk_hit    = 1'b0;
    lk_way    = '0;
    vic_way   = '0;
    found_inv = 1'b0;
    best      = '1;
    for (int w = 0; w < int'(NWAYS); w++) begin
      if (ent[lk_sub][w].valid && ent[lk_sub][w].tag == lk_row && !lk_hit) begin
        lk_hit = 1'b1;
        lk_way = WW'(w);
      end
    end
    for (int w = 0; w < int'(NWAYS); w++) begin
      if (!found_inv) begin
        if (!ent[lk_sub][w].valid) begin
          found_inv = 1'b1;
          vic_way   = WW'(w);
        end else if (w == 0 || ent[lk_sub][w].ben < best) begin
          best    = ent[lk_sub][w].ben;
          vic_way = WW'(w);
        end
      end
    end
    vic_valid = ent[lk_sub][vic_way].valid;
    vic_dirty = ent[lk_sub][vic_way].dirty;
    vic_tag   = ent[lk_sub][vic_way].tag;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(SUBS); s++)
        for (int w = 0; w < int'(NWAYS); w++)
          ent[s][w] <= '0;
    end else if (upd_fill) begin
      ent[upd_sub][upd_way] <= '{valid: 1'b1, dirty: 1'b0, tag: upd_tag, ben: BENW'(1)};
    end else if (upd_hit) begin
      if (ent[upd_sub][upd_way].ben == '1) begin
        for (int w = 0; w < int'(NWAYS); w++)
          ent[upd_sub][w].ben <= ent[upd_sub][w].ben >> 1;
        ent[upd_sub][upd_way].ben <= (ent[upd_sub][upd_way].ben >> 1) + BENW'(1);
      end else begin
        ent[upd_sub][upd_way].ben <= ent[upd_sub][upd_way].ben + BENW'(1);
      end
      if (upd_dirty) ent[upd_sub][upd_way].dirty <= 1'b1;
    end
  end

endmodule
