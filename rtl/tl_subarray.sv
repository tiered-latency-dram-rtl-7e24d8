// tl_subarray -- behavioural model of one Tiered-Latency DRAM subarray.
//
// This is a behavioural model, not synthesizable logic: it stands for the
// analog cell array, the isolation transistors and the sense amplifiers.  Each
// bitline of ROWS cells is cut by an isolation transistor into a near segment
// (rows 0 .. NEAR_ROWS-1, wired straight to the sense amplifiers) and a far
// segment (rows NEAR_ROWS .. ROWS-1, reached through the transistor).  An
// access to a near row leaves the transistor off and sees the short-bitline
// timing; an access to a far row turns it on and sees the far-segment timing
// (faster tRCD, slower tRAS and tRP than an unsegmented bitline).
//
// Commands (one per cycle, tl_pkg::cmd_e):
//   ACT row  with the bank precharged: the row is latched into the sense
//            amplifiers (row_open goes high, iso_on high for a far row).
//   ACT row  while a row is open: inter-segment transfer.  The isolation
//            transistor is turned on and the sense amplifiers drive the latched
//            data onto the newly opened row of the other segment, so the whole
//            row is copied over the bitlines without using the data bus.
//   RD col   returns the column word on rdata one cycle later (rvalid).
//   WR col   writes the column word into the sense amplifiers and the open row.
//   PRE      closes the row and precharges the bitline.
// The model checks the segment timing of every command and pulses timing_err
// on a violation or an illegal command: RD/WR before tRCD, PRE before tRAS (or,
// after a transfer, before far tRAS + transfer time and transfer time after the
// second ACT), ACT before tRP of the segment(s) last precharged, a transfer
// within one segment, RD/WR after a transfer.
// Cells start with the pattern INIT_ID*65536 + row*16 + col so that a reader
// can tell rows apart before anything has been written.
// Follows the paper: the near/far split, the isolation transistor's on/off
// rule, per-segment timing, the bitline transfer and its extra time.  Own
// choices: row and word sizes, the command set above, the timing split into
// tRCD/tRAS/tRP (tl_pkg), one-cycle read latency.
module tl_subarray
  import tl_pkg::*;
#(
  parameter int unsigned ROWS       = tl_pkg::ROWS_PER_SA,
  parameter int unsigned NROWS      = tl_pkg::NEAR_ROWS,
  parameter int unsigned COLS       = tl_pkg::COLS_PER_ROW,
  parameter int unsigned WBITS      = tl_pkg::WORD_BITS,
  parameter int unsigned INIT_ID    = 0,
  localparam int unsigned RW        = $clog2(ROWS),
  localparam int unsigned CW        = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cmd_e             cmd,
  input  logic [RW-1:0]    row,
  input  logic [CW-1:0]    col,
  input  logic [WBITS-1:0] wdata,
  output logic [WBITS-1:0] rdata,
  output logic             rvalid,
  output logic             row_open,
  output logic             iso_on,
  output logic             timing_err
);

  logic [WBITS-1:0] cells [ROWS][COLS];
  logic [WBITS-1:0] sa    [COLS];        // sense amplifiers (row buffer)

  logic [RW-1:0] open_row;
  seg_e          open_seg;
  seg_e          pre_seg;                // segment whose tRP is pending
  logic          xfer_done;
  logic [7:0]    t_act, t_xfer, t_pre;   // cycles since ACT, transfer, PRE

  function automatic seg_e seg_of(logic [RW-1:0] r);
    return (32'(r) < NROWS) ? SEG_NEAR : SEG_FAR;
  endfunction

  initial begin
    for (int r = 0; r < int'(ROWS); r++)
      for (int c = 0; c < int'(COLS); c++)
        cells[r][c] = WBITS'(INIT_ID * 65536 + r * 16 + c);
  end

  seg_timing_t tim_open, tim_pre;
  assign tim_open = seg_timing(open_seg);
  assign tim_pre  = seg_timing(pre_seg);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row_open   <= 1'b0;
      iso_on     <= 1'b0;
      xfer_done  <= 1'b0;
      open_row   <= '0;
      open_seg   <= SEG_NEAR;
      pre_seg    <= SEG_NEAR;
      t_act      <= 8'hff;
      t_xfer     <= 8'hff;
      t_pre      <= 8'hff;
      rvalid     <= 1'b0;
      rdata      <= '0;
      timing_err <= 1'b0;
    end else begin
      rvalid     <= 1'b0;
      timing_err <= 1'b0;
      if (t_act  != 8'hff) t_act  <= t_act  + 8'd1;
      if (t_xfer != 8'hff) t_xfer <= t_xfer + 8'd1;
      if (t_pre  != 8'hff) t_pre  <= t_pre  + 8'd1;
      unique case (cmd)
        CMD_ACT: begin
          if (!row_open) begin
            if (t_pre < tim_pre.rp) timing_err <= 1'b1;
            for (int c = 0; c < int'(COLS); c++) sa[c] <= cells[row][c];
            row_open  <= 1'b1;
            open_row  <= row;
            open_seg  <= seg_of(row);
            iso_on    <= (seg_of(row) == SEG_FAR);
            xfer_done <= 1'b0;
            t_act     <= 8'd1;
          end else begin
            // Inter-segment transfer: sense amplifiers drive the new row.
            if (t_act < tim_open.ras || xfer_done || seg_of(row) == open_seg)
              timing_err <= 1'b1;
            for (int c = 0; c < int'(COLS); c++) cells[row][c] <= sa[c];
            iso_on    <= 1'b1;
            xfer_done <= 1'b1;
            t_xfer    <= 8'd1;
          end
        end
        CMD_RD: begin
          if (!row_open || xfer_done || t_act < tim_open.rcd) timing_err <= 1'b1;
          rdata  <= sa[col];
          rvalid <= 1'b1;
        end
        CMD_WR: begin
          if (!row_open || xfer_done || t_act < tim_open.rcd) timing_err <= 1'b1;
          sa[col]             <= wdata;
          cells[open_row][col] <= wdata;
        end
        CMD_PRE: begin
          if (!row_open) timing_err <= 1'b1;
          else if (xfer_done) begin
            if (32'(t_act) < T_RAS_FAR + T_XFER || 32'(t_xfer) < T_XFER)
              timing_err <= 1'b1;
          end else if (t_act < tim_open.ras) timing_err <= 1'b1;
          row_open  <= 1'b0;
          iso_on    <= 1'b0;
          xfer_done <= 1'b0;
          pre_seg   <= iso_on ? SEG_FAR : SEG_NEAR;
          t_pre     <= 8'd1;
        end
        default: ;
      endcase
    end
  end

endmodule
