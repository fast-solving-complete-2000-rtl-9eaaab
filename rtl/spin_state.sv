// spin_state: double-buffered spin vector sigma.
//
// Every spin update of annealing cycle t+1 must see the states sigma_j(t) of
// cycle t, so the new states are collected in a second register vector and
// copied over all at once when the cycle ends. cur holds sigma(t), nxt
// collects sigma(t+1).
//
// Interface: re loads sigma_chunk with cur bits [chunk*LANES +: LANES] at the
// clock edge (one clock of latency, matching the coupling store). we writes
// the P bits wbits into nxt[wgroup*P +: P], the states of the P spins that
// the P spin gates have just finished. swap copies nxt to cur. init
// (priority over all) sets both vectors to all +1, which is sgn(0), the sign
// of a counter reset to zero. Reset does the same. sigma_all shows cur, the
// current solution.
//
// Synchronous update is the algorithm's; the double buffer is this design's
// way to get it.
module spin_state #(
  parameter int unsigned N     = 2000,
  parameter int unsigned LANES = 100,
  parameter int unsigned P     = 1,
  localparam int unsigned CHUNKS = N / LANES,
  localparam int unsigned CW = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned GROUPS = N / P,
  localparam int unsigned GW = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             init,
  input  logic             re,
  input  logic [CW-1:0]    chunk,
  output logic [LANES-1:0] sigma_chunk,
  input  logic             we,
  input  logic [GW-1:0]    wgroup,
  input  logic [P-1:0]     wbits,
  input  logic             swap,
  output logic [N-1:0]     sigma_all
);

  logic [N-1:0] cur_q, nxt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_q       <= '1;
      nxt_q       <= '1;
      sigma_chunk <= '1;
    end else if (init) begin
      cur_q <= '1;
      nxt_q <= '1;
    end else begin
      if (re)   sigma_chunk <= cur_q[chunk*LANES +: LANES];
      if (we)   nxt_q[wgroup*P +: P] <= wbits;
      if (swap) cur_q <= nxt_q;
    end
  end

  assign sigma_all = cur_q;

endmodule
