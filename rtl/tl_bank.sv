// tl_bank -- behavioural model of one TL-DRAM bank.
//
// This is a behavioural model (it is built from tl_subarray, which models the
// analog cell array).  A bank holds SUBS subarrays, each with its own
// segmented bitlines and sense amplifiers.  A command on the bank's command
// port (cmd, sub, row, col, wdata) goes to subarray `sub`; every other
// subarray sees NOP.  Read data comes back one cycle after RD on rdata/rvalid.
// Inter-segment transfers happen inside one subarray, so they never touch the
// channel's data bus and another bank can be read or written meanwhile.
// iso_on shows, per subarray, whether its isolation transistors are on;
// timing_err pulses when any subarray sees a timing violation.
// Own choices: the number of subarrays per bank and the read latency.
module tl_bank
  import tl_pkg::*;
#(
  parameter int unsigned SUBS    = tl_pkg::SUBARRAYS,
  parameter int unsigned ROWS    = tl_pkg::ROWS_PER_SA,
  parameter int unsigned NROWS   = tl_pkg::NEAR_ROWS,
  parameter int unsigned COLS    = tl_pkg::COLS_PER_ROW,
  parameter int unsigned WBITS   = tl_pkg::WORD_BITS,
  parameter int unsigned BANK_ID = 0,
  localparam int unsigned SW     = (SUBS > 1) ? $clog2(SUBS) : 1,
  localparam int unsigned RW     = $clog2(ROWS),
  localparam int unsigned CW     = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cmd_e             cmd,
  input  logic [SW-1:0]    sub,
  input  logic [RW-1:0]    row,
  input  logic [CW-1:0]    col,
  input  logic [WBITS-1:0] wdata,
  output logic [WBITS-1:0] rdata,
  output logic             rvalid,
  output logic [SUBS-1:0]  iso_on,
  output logic             timing_err
);

  logic [WBITS-1:0] sa_rdata  [SUBS];
  logic [SUBS-1:0]  sa_rvalid;
  logic [SUBS-1:0]  sa_err;
  logic [SUBS-1:0]  sa_open;

  for (genvar s = 0; s < int'(SUBS); s++) begin : g_sa
    tl_subarray #(
      .ROWS(ROWS), .NROWS(NROWS), .COLS(COLS), .WBITS(WBITS),
      .INIT_ID(BANK_ID * SUBS + s)
    ) u_sa (
      .clk       (clk),
      .rst_n     (rst_n),
      .cmd       ((32'(sub) == s) ? cmd : CMD_NOP),
      .row       (row),
      .col       (col),
      .wdata     (wdata),
      .rdata     (sa_rdata[s]),
      .rvalid    (sa_rvalid[s]),
      .row_open  (sa_open[s]),
      .iso_on    (iso_on[s]),
      .timing_err(sa_err[s])
    );
  end

  always_comb begin
    rdata = '0;
    for (int s = 0; s < int'(SUBS); s++)
      if (sa_rvalid[s]) rdata = sa_rdata[s];
  end
  assign rvalid     = |sa_rvalid;
  assign timing_err = |sa_err;

  // The controller keeps at most one subarray of a bank open.
  always_ff @(posedge clk)
    if (rst_n) assert ($countones(sa_open) <= 1)
      else $error("tl_bank: more than one subarray open");

endmodule
