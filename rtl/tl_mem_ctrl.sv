// tl_mem_ctrl -- TL-DRAM memory controller with the near segment as a cache.
//
// One tl_bank_ctrl per bank runs that bank's accesses, cache fills and
// write-backs on its own; cmd_arbiter picks one of their commands per cycle for
// the shared command bus (dram_cmd, dram_bank, dram_sub, dram_row, dram_col,
// dram_wdata).  Requests arrive on a valid/ready port with a bank field and go
// to that bank's controller; req_ready is the ready of the addressed bank, so
// requests to a busy bank wait while requests to idle banks proceed.  Read
// data comes back on the channel data bus (dram_rvalid/dram_rdata) one cycle
// after the RD; the controller remembers which bank issued the RD and returns
// the data with that request's id on resp_*.  The event outputs ev_* (hit,
// miss, fill, write-back) are per-bank vectors of one-cycle pulses, since
// several banks may report an event in the same cycle.
// Follows the paper: hardware-managed near-segment cache, transfers inside a
// bank concurrent with accesses to other banks.  Own choices: the request
// port, the arbitration and the one-cycle read return.
module tl_mem_ctrl
  import tl_pkg::*;
#(
  parameter int unsigned NB     = tl_pkg::BANKS,
  parameter int unsigned SUBS   = tl_pkg::SUBARRAYS,
  parameter int unsigned ROWS   = tl_pkg::ROWS_PER_SA,
  parameter int unsigned NROWS  = tl_pkg::NEAR_ROWS,
  parameter int unsigned COLS   = tl_pkg::COLS_PER_ROW,
  parameter int unsigned WBITS  = tl_pkg::WORD_BITS,
  parameter int unsigned IDW    = 8,
  localparam int unsigned BW    = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned SW    = (SUBS > 1) ? $clog2(SUBS) : 1,
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned FW    = $clog2(ROWS - NROWS),
  localparam int unsigned CW    = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // requests
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [BW-1:0]    req_bank,
  input  logic [SW-1:0]    req_sub,
  input  logic [FW-1:0]    req_row,
  input  logic [CW-1:0]    req_col,
  input  logic             req_we,
  input  logic [WBITS-1:0] req_wdata,
  input  logic [IDW-1:0]   req_id,
  // responses
  output logic             resp_valid,
  output logic [WBITS-1:0] resp_rdata,
  output logic [IDW-1:0]   resp_id,
  // DRAM channel
  output cmd_e             dram_cmd,
  output logic [BW-1:0]    dram_bank,
  output logic [SW-1:0]    dram_sub,
  output logic [RW-1:0]    dram_row,
  output logic [CW-1:0]    dram_col,
  output logic [WBITS-1:0] dram_wdata,
  input  logic             dram_rvalid,
  input  logic [WBITS-1:0] dram_rdata,
  // events, one bit per bank
  output logic [NB-1:0]    ev_hit,
  output logic [NB-1:0]    ev_miss,
  output logic [NB-1:0]    ev_fill,
  output logic [NB-1:0]    ev_wb
);

  logic [NB-1:0]    b_ready, b_cmd_req, b_gnt, b_resp_valid;
  cmd_e             b_cmd   [NB];
  logic [SW-1:0]    b_sub   [NB];
  logic [RW-1:0]    b_row   [NB];
  logic [CW-1:0]    b_col   [NB];
  logic [WBITS-1:0] b_wdata [NB];
  logic [WBITS-1:0] b_rdata [NB];
  logic [IDW-1:0]   b_id    [NB];
  logic [BW-1:0]    gnt_idx;
  logic [BW-1:0]    rd_bank;

  for (genvar b = 0; b < int'(NB); b++) begin : g_bank
    tl_bank_ctrl #(
      .SUBS(SUBS), .ROWS(ROWS), .NROWS(NROWS), .COLS(COLS), .WBITS(WBITS), .IDW(IDW)
    ) u_bctrl (
      .clk        (clk),
      .rst_n      (rst_n),
      .req_valid  (req_valid && 32'(req_bank) == b),
      .req_ready  (b_ready[b]),
      .req_sub    (req_sub),
      .req_row    (req_row),
      .req_col    (req_col),
      .req_we     (req_we),
      .req_wdata  (req_wdata),
      .req_id     (req_id),
      .cmd_req    (b_cmd_req[b]),
      .cmd_gnt    (b_gnt[b]),
      .cmd        (b_cmd[b]),
      .cmd_sub    (b_sub[b]),
      .cmd_row    (b_row[b]),
      .cmd_col    (b_col[b]),
      .cmd_wdata  (b_wdata[b]),
      .bank_rvalid(dram_rvalid && 32'(rd_bank) == b),
      .bank_rdata (dram_rdata),
      .resp_valid (b_resp_valid[b]),
      .resp_rdata (b_rdata[b]),
      .resp_id    (b_id[b]),
      .ev_hit     (ev_hit[b]),
      .ev_miss    (ev_miss[b]),
      .ev_fill    (ev_fill[b]),
      .ev_wb      (ev_wb[b])
    );
  end

  cmd_arbiter #(.N(NB)) u_arb (
    .clk    (clk),
    .rst_n  (rst_n),
    .req    (b_cmd_req),
    .gnt    (b_gnt),
    .gnt_idx(gnt_idx)
  );

  assign req_ready = b_ready[req_bank];

  always_comb begin
    dram_cmd   = |b_gnt ? b_cmd[gnt_idx] : CMD_NOP;
    dram_bank  = gnt_idx;
    dram_sub   = b_sub[gnt_idx];
    dram_row   = b_row[gnt_idx];
    dram_col   = b_col[gnt_idx];
    dram_wdata = b_wdata[gnt_idx];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_bank <= '0;
    else if (dram_cmd == CMD_RD) rd_bank <= gnt_idx;
  end

  always_comb begin
    resp_valid = 1'b0;
    resp_rdata = '0;
    resp_id    = '0;
    for (int b = 0; b < int'(NB); b++)
      if (b_resp_valid[b]) begin
        resp_valid = 1'b1;
        resp_rdata = b_rdata[b];
        resp_id    = b_id[b];
      end
  end

endmodule
