// tldram_top -- a TL-DRAM channel: memory controller plus NB TL-DRAM banks.
//
// The controller (tl_mem_ctrl) serves word reads and writes to far rows; it
// keeps recently used far rows cached in the near segment of their own
// subarray and moves rows between segments with in-bank transfers.  The banks
// (tl_bank, behavioural models of the segmented-bitline cell arrays) decode
// the shared command bus by its bank field and return read data one cycle
// after a RD on a shared data bus.
//
// Ports: a valid/ready request (bank, sub, row = far-row index, col, we,
// wdata, id) and a response (valid, rdata, id) for reads; writes get no
// response.  Statistics: running counts of near-segment hits, misses, fills
// (far-to-near transfers) and write-backs (near-to-far transfers), the number
// of DRAM timing violations the bank models saw (zero in correct operation),
// and the isolation-transistor state of every subarray.
// Follows the paper: the organisation of the design and its caching use of the
// near segment.  Own choices: see the modules it instantiates.
module tldram_top
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
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [BW-1:0]      req_bank,
  input  logic [SW-1:0]      req_sub,
  input  logic [FW-1:0]      req_row,
  input  logic [CW-1:0]      req_col,
  input  logic               req_we,
  input  logic [WBITS-1:0]   req_wdata,
  input  logic [IDW-1:0]     req_id,
  output logic               resp_valid,
  output logic [WBITS-1:0]   resp_rdata,
  output logic [IDW-1:0]     resp_id,
  output logic [31:0]        n_hit,
  output logic [31:0]        n_miss,
  output logic [31:0]        n_fill,
  output logic [31:0]        n_wb,
  output logic [31:0]        n_timing_err,
  output logic [NB*SUBS-1:0] iso_on
);

  cmd_e             dram_cmd;
  logic [BW-1:0]    dram_bank;
  logic [SW-1:0]    dram_sub;
  logic [RW-1:0]    dram_row;
  logic [CW-1:0]    dram_col;
  logic [WBITS-1:0] dram_wdata;
  logic             dram_rvalid;
  logic [WBITS-1:0] dram_rdata;
  logic [NB-1:0]    ev_hit, ev_miss, ev_fill, ev_wb;

  tl_mem_ctrl #(
    .NB(NB), .SUBS(SUBS), .ROWS(ROWS), .NROWS(NROWS), .COLS(COLS),
    .WBITS(WBITS), .IDW(IDW)
  ) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .req_valid  (req_valid),
    .req_ready  (req_ready),
    .req_bank   (req_bank),
    .req_sub    (req_sub),
    .req_row    (req_row),
    .req_col    (req_col),
    .req_we     (req_we),
    .req_wdata  (req_wdata),
    .req_id     (req_id),
    .resp_valid (resp_valid),
    .resp_rdata (resp_rdata),
    .resp_id    (resp_id),
    .dram_cmd   (dram_cmd),
    .dram_bank  (dram_bank),
    .dram_sub   (dram_sub),
    .dram_row   (dram_row),
    .dram_col   (dram_col),
    .dram_wdata (dram_wdata),
    .dram_rvalid(dram_rvalid),
    .dram_rdata (dram_rdata),
    .ev_hit     (ev_hit),
    .ev_miss    (ev_miss),
    .ev_fill    (ev_fill),
    .ev_wb      (ev_wb)
  );

  logic [NB-1:0]    bk_rvalid, bk_err;
  logic [WBITS-1:0] bk_rdata [NB];

  for (genvar b = 0; b < int'(NB); b++) begin : g_bank
    tl_bank #(
      .SUBS(SUBS), .ROWS(ROWS), .NROWS(NROWS), .COLS(COLS), .WBITS(WBITS),
      .BANK_ID(b)
    ) u_bank (
      .clk       (clk),
      .rst_n     (rst_n),
      .cmd       ((32'(dram_bank) == b) ? dram_cmd : CMD_NOP),
      .sub       (dram_sub),
      .row       (dram_row),
      .col       (dram_col),
      .wdata     (dram_wdata),
      .rdata     (bk_rdata[b]),
      .rvalid    (bk_rvalid[b]),
      .iso_on    (iso_on[b*SUBS +: SUBS]),
      .timing_err(bk_err[b])
    );
  end

  always_comb begin
    dram_rdata = '0;
    for (int b = 0; b < int'(NB); b++)
      if (bk_rvalid[b]) dram_rdata = bk_rdata[b];
  end
  assign dram_rvalid = |bk_rvalid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n_hit <= '0; n_miss <= '0; n_fill <= '0; n_wb <= '0; n_timing_err <= '0;
    end else begin
      n_hit        <= n_hit  + 32'($countones(ev_hit));
      n_miss       <= n_miss + 32'($countones(ev_miss));
      n_fill       <= n_fill + 32'($countones(ev_fill));
      n_wb         <= n_wb   + 32'($countones(ev_wb));
      n_timing_err <= n_timing_err + 32'($countones(bk_err));
    end
  end

endmodule
