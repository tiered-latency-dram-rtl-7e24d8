// cmd_arbiter -- round-robin arbiter for the shared DRAM command bus.
//
// All bank controllers of a channel share one command bus that carries one
// command per cycle.  Each cycle the arbiter grants exactly one raised request
// (one-hot gnt), searching from the requester after the one granted last, so
// every bank with a pending command is served within N cycles.  With nothing
// requested gnt is zero.  Grant is combinational from req; the pointer moves
// at the clock edge after a grant.
// Because the transfer between segments runs inside a bank and only needs two
// ACTs and a PRE on this bus, other banks keep getting slots for their own
// accesses meanwhile.  The paper states that concurrency; the round-robin
// order is this design's own choice.
module cmd_arbiter #(
  parameter int unsigned N  = tl_pkg::BANKS,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  output logic [N-1:0]  gnt,
  output logic [IW-1:0] gnt_idx
);

  logic [IW-1:0] last;

  always_comb begin
    logic found;
    int unsigned k;
    gnt     = '0;
    gnt_idx = '0;
    found   = 1'b0;
    for (int unsigned i = 1; i <= N; i++) begin
      k = (32'(last) + i) % N;
      if (!found && req[k]) begin
        found   = 1'b1;
        gnt[k]  = 1'b1;
        gnt_idx = IW'(k);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) last <= IW'(N - 1);
    else if (|req) last <= gnt_idx;
  end

  always_ff @(posedge clk)
    if (rst_n) assert ($onehot0(gnt) && ((gnt & ~req) == '0))
      else $error("cmd_arbiter: bad grant");

endmodule
