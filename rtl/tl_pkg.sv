// tl_pkg -- shared types and constants of the Tiered-Latency DRAM design.
//
// A TL-DRAM subarray has bitlines of 512 cells that an isolation transistor
// splits into a near segment (next to the sense amplifiers) and a far segment.
// Rows 0 .. NEAR_ROWS-1 of a subarray are the near segment, the rest are the
// far segment.  The near segment is fast (tRC 23.1 ns for 32 cells), the far
// segment slow (tRC 65.8 ns for 480 cells); an inter-segment transfer costs
// 4 ns on top of tRC.  Those four numbers and the 32/480 split come from the
// design's published latency table.  Everything else here is this design's own
// choice: a 1.25 ns command clock (DDR3-1600), the split of each tRC into
// tRAS + tRP, and tRCD.  All timings are in command-clock cycles, rounded up.
//
// The command bus between controller and DRAM carries one dram_cmd_t per
// cycle: ACT opens a row (a second ACT while a row is open copies the latched
// row into the newly named row: the inter-segment transfer), RD/WR move one
// column word, PRE closes the row and precharges the bitlines.
package tl_pkg;

  // Geometry (defaults of the design).
  localparam int unsigned ROWS_PER_SA   = 512;  // cells per bitline
  localparam int unsigned NEAR_ROWS     = 32;   // near-segment length
  localparam int unsigned COLS_PER_ROW  = 8;    // column words per row (assumed)
  localparam int unsigned WORD_BITS     = 64;   // bits per column word (assumed)
  localparam int unsigned SUBARRAYS     = 4;    // subarrays per bank (assumed)
  localparam int unsigned BANKS         = 8;    // banks per channel (assumed)

  // Segment timing in 1.25 ns cycles.
  //   near : tRC = ceil(23.1 / 1.25) = 19 = tRAS 12 + tRP 7,  tRCD 6
  //   far  : tRC = ceil(65.8 / 1.25) = 53 = tRAS 36 + tRP 17, tRCD 9
  //   transfer extra = ceil(4.0 / 1.25) = 4
  localparam int unsigned T_RCD_NEAR = 6;
  localparam int unsigned T_RAS_NEAR = 12;
  localparam int unsigned T_RP_NEAR  = 7;
  localparam int unsigned T_RCD_FAR  = 9;
  localparam int unsigned T_RAS_FAR  = 36;
  localparam int unsigned T_RP_FAR   = 17;
  localparam int unsigned T_XFER     = 4;

  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_RD  = 3'd2,
    CMD_WR  = 3'd3,
    CMD_PRE = 3'd4
  } cmd_e;

  typedef enum logic {
    SEG_NEAR = 1'b0,
    SEG_FAR  = 1'b1
  } seg_e;

  // Segment timing set, selected per access.
  typedef struct packed {
    logic [7:0] rcd;
    logic [7:0] ras;
    logic [7:0] rp;
  } seg_timing_t;

  function automatic seg_timing_t seg_timing(seg_e seg);
    seg_timing_t t;
    if (seg == SEG_NEAR) begin
      t.rcd = 8'(T_RCD_NEAR); t.ras = 8'(T_RAS_NEAR); t.rp = 8'(T_RP_NEAR);
    end else begin
      t.rcd = 8'(T_RCD_FAR);  t.ras = 8'(T_RAS_FAR);  t.rp = 8'(T_RP_FAR);
    end
    return t;
  endfunction

endpackage
