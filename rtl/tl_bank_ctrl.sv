// tl_bank_ctrl -- per-bank part of the TL-DRAM memory controller.
//
// The controller uses each subarray's near segment as a cache for the far rows
// of the same subarray.  The address a request carries (sub, row, col) names a
// far row: row r of the request is physical row NROWS + r.  For each request
// the controller looks the row up in near_seg_tags:
//   hit  : the access goes to the cached copy in near row `way`, with the near
//          segment's timing (tRCD/tRAS/tRP of the short segment).
//   miss : the access goes to the far row with the far segment's timing.  While
//          the far row is still latched in the sense amplifiers, a second ACT
//          to the victim near row copies it into the near segment over the
//          bitlines (inter-segment transfer, far tRC + 4 ns in all), and the
//          tag store is updated.  If the victim holds a row that was written
//          while cached (dirty), it is first copied back to its far home row
//          with a near-to-far transfer.
// All accesses use a closed-row policy: ACT, one RD or WR, PRE.
//
// Interface: a valid/ready request port; a command port with cmd_req/cmd_gnt
// toward the shared command bus (a command is issued in the cycle its request
// is granted; requests are raised only when the segment timing allows them);
// resp_valid/resp_rdata/resp_id pass read data from the bank back with the
// request id.  ev_* pulse once per hit, miss, fill and write-back.
// Timing of a lone request (from the cycle after acceptance, no bus conflict):
// the ACT is issued after one lookup cycle; a hit holds the bank for near tRC,
// a clean miss for far tRC + transfer, a dirty miss adds another far tRC +
// transfer for the write-back.
// Follows the paper: near segment as hardware-managed cache of the far
// segment, segment-dependent timing, transfer over the bitlines at tRC + 4 ns
// inside the bank.  Own choices: closed-row policy, insert on every miss,
// write-back of dirty rows on eviction, the command handshake.
module tl_bank_ctrl
  import tl_pkg::*;
#(
  parameter int unsigned SUBS   = tl_pkg::SUBARRAYS,
  parameter int unsigned ROWS   = tl_pkg::ROWS_PER_SA,
  parameter int unsigned NROWS  = tl_pkg::NEAR_ROWS,
  parameter int unsigned COLS   = tl_pkg::COLS_PER_ROW,
  parameter int unsigned WBITS  = tl_pkg::WORD_BITS,
  parameter int unsigned IDW    = 8,
  localparam int unsigned SW    = (SUBS > 1) ? $clog2(SUBS) : 1,
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned FW    = $clog2(ROWS - NROWS),
  localparam int unsigned CW    = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned WW    = (NROWS > 1) ? $clog2(NROWS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // requests
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [SW-1:0]    req_sub,
  input  logic [FW-1:0]    req_row,
  input  logic [CW-1:0]    req_col,
  input  logic             req_we,
  input  logic [WBITS-1:0] req_wdata,
  input  logic [IDW-1:0]   req_id,
  // command bus
  output logic             cmd_req,
  input  logic             cmd_gnt,
  output cmd_e             cmd,
  output logic [SW-1:0]    cmd_sub,
  output logic [RW-1:0]    cmd_row,
  output logic [CW-1:0]    cmd_col,
  output logic [WBITS-1:0] cmd_wdata,
  // read return from the bank
  input  logic             bank_rvalid,
  input  logic [WBITS-1:0] bank_rdata,
  output logic             resp_valid,
  output logic [WBITS-1:0] resp_rdata,
  output logic [IDW-1:0]   resp_id,
  // events
  output logic             ev_hit,
  output logic             ev_miss,
  output logic             ev_fill,
  output logic             ev_wb
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_WB_ACT1, S_WB_ACT2, S_WB_PRE,
    S_ACT, S_COL, S_FILL, S_FILL_PRE, S_PRE
  } state_e;

  state_e state;

  // Latched request.
  logic [SW-1:0]    r_sub;
  logic [FW-1:0]    r_row;
  logic [CW-1:0]    r_col;
  logic             r_we;
  logic [WBITS-1:0] r_wdata;
  logic [IDW-1:0]   r_id;
  logic [IDW-1:0]   rd_id;

  // Access target.
  logic [RW-1:0]    tgt_row;
  seg_e             tgt_seg;
  logic [WW-1:0]    v_way;
  logic [FW-1:0]    v_tag;

  // Timing counters (saturating): since first ACT, since transfer ACT, since PRE.
  logic [7:0] t_act, t_x, t_pre;
  seg_e       pre_seg;
  seg_timing_t tim_tgt, tim_pre;
  assign tim_tgt = seg_timing(tgt_seg);
  assign tim_pre = seg_timing(pre_seg);

  logic act_ok;
  assign act_ok = (t_pre >= tim_pre.rp);
  logic xfer_pre_ok;
  assign xfer_pre_ok = (32'(t_act) >= T_RAS_FAR + T_XFER) && (32'(t_x) >= T_XFER);

  // Tag store.
  logic            lk_hit, vic_valid, vic_dirty;
  logic [WW-1:0]   lk_way, vic_way;
  logic [FW-1:0]   vic_tag;
  logic            upd_hit, upd_fill;

  near_seg_tags #(.SUBS(SUBS), .NWAYS(NROWS), .TAGW(FW)) u_tags (
    .clk      (clk),
    .rst_n    (rst_n),
    .lk_sub   (r_sub),
    .lk_row   (r_row),
    .lk_hit   (lk_hit),
    .lk_way   (lk_way),
    .vic_way  (vic_way),
    .vic_valid(vic_valid),
    .vic_dirty(vic_dirty),
    .vic_tag  (vic_tag),
    .upd_hit  (upd_hit),
    .upd_fill (upd_fill),
    .upd_sub  (r_sub),
    .upd_way  ((state == S_LOOKUP) ? lk_way : v_way),
    .upd_dirty(r_we),
    .upd_tag  (r_row)
  );

  assign req_ready = (state == S_IDLE);

  // Command request for the current state.
  always_comb begin
    cmd_req   = 1'b0;
    cmd       = CMD_NOP;
    cmd_sub   = r_sub;
    cmd_row   = tgt_row;
    cmd_col   = r_col;
    cmd_wdata = r_wdata;
    unique case (state)
      S_WB_ACT1: begin cmd_req = act_ok; cmd = CMD_ACT; cmd_row = RW'(v_way); end
      S_WB_ACT2: begin
        cmd_req = (32'(t_act) >= T_RAS_NEAR); cmd = CMD_ACT;
        cmd_row = RW'(NROWS) + RW'(v_tag);
      end
      S_WB_PRE:   begin cmd_req = xfer_pre_ok; cmd = CMD_PRE; end
      S_ACT:      begin cmd_req = act_ok; cmd = CMD_ACT; end
      S_COL:      begin cmd_req = (t_act >= tim_tgt.rcd); cmd = r_we ? CMD_WR : CMD_RD; end
      S_FILL:     begin cmd_req = (32'(t_act) >= T_RAS_FAR); cmd = CMD_ACT; cmd_row = RW'(v_way); end
      S_FILL_PRE: begin cmd_req = xfer_pre_ok; cmd = CMD_PRE; end
      S_PRE:      begin cmd_req = (t_act >= tim_tgt.ras); cmd = CMD_PRE; end
      default: ;
    endcase
  end

  logic issue;
  assign issue = cmd_req && cmd_gnt;

  assign upd_hit  = (state == S_LOOKUP) && lk_hit;
  assign upd_fill = (state == S_FILL_PRE) && issue;
  assign ev_hit   = upd_hit;
  assign ev_miss  = (state == S_LOOKUP) && !lk_hit;
  assign ev_fill  = upd_fill;
  assign ev_wb    = (state == S_WB_PRE) && issue;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      t_act   <= 8'hff;
      t_x     <= 8'hff;
      t_pre   <= 8'hff;
      pre_seg <= SEG_NEAR;
      r_sub   <= '0;
      r_row   <= '0;
      r_col   <= '0;
      r_we    <= 1'b0;
      r_wdata <= '0;
      r_id    <= '0;
      rd_id   <= '0;
      tgt_row <= '0;
      tgt_seg <= SEG_NEAR;
      v_way   <= '0;
      v_tag   <= '0;
    end else begin
      if (t_act != 8'hff) t_act <= t_act + 8'd1;
      if (t_x   != 8'hff) t_x   <= t_x   + 8'd1;
      if (t_pre != 8'hff) t_pre <= t_pre + 8'd1;
      if (issue) begin
        if (cmd == CMD_ACT && (state == S_WB_ACT1 || state == S_ACT)) t_act <= 8'd1;
        if (cmd == CMD_ACT && (state == S_WB_ACT2 || state == S_FILL)) t_x <= 8'd1;
        if (cmd == CMD_PRE) t_pre <= 8'd1;
        if (cmd == CMD_RD) rd_id <= r_id;
      end
      unique case (state)
        S_IDLE: if (req_valid) begin
          r_sub <= req_sub; r_row <= req_row; r_col <= req_col;
          r_we  <= req_we;  r_wdata <= req_wdata; r_id <= req_id;
          state <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (lk_hit) begin
            tgt_row <= RW'(lk_way);
            tgt_seg <= SEG_NEAR;
            state   <= S_ACT;
          end else begin
            tgt_row <= RW'(NROWS) + RW'(r_row);
            tgt_seg <= SEG_FAR;
            v_way   <= vic_way;
            v_tag   <= vic_tag;
            state   <= (vic_valid && vic_dirty) ? S_WB_ACT1 : S_ACT;
          end
        end
        S_WB_ACT1:  if (issue) state <= S_WB_ACT2;
        S_WB_ACT2:  if (issue) state <= S_WB_PRE;
        S_WB_PRE:   if (issue) begin pre_seg <= SEG_FAR; state <= S_ACT; end
        S_ACT:      if (issue) state <= S_COL;
        S_COL:      if (issue) state <= (tgt_seg == SEG_FAR) ? S_FILL : S_PRE;
        S_FILL:     if (issue) state <= S_FILL_PRE;
        S_FILL_PRE: if (issue) begin pre_seg <= SEG_FAR; state <= S_IDLE; end
        S_PRE:      if (issue) begin pre_seg <= tgt_seg; state <= S_IDLE; end
        default:    state <= S_IDLE;
      endcase
    end
  end

  assign resp_valid = bank_rvalid;
  assign resp_rdata = bank_rdata;
  assign resp_id    = rd_id;

  // A grant is only given to a raised request.
  always_ff @(posedge clk)
    if (rst_n) assert (!cmd_gnt || cmd_req) else $error("tl_bank_ctrl: grant without request");

endmodule
