// ram_1r1w: synchronous memory with one write port and one read port.
//
// The core uses three of them: the coupling store (the matrix J, LANES
// couplings per word), the bias store (h) and the counter store (Itanh of
// every spin). A write with we high stores wdata at waddr at the clock edge.
// A read with re high returns mem[raddr] on rdata after the edge (one clock
// of latency, like an SRAM macro); rdata holds its value while re is low.
// A read and a write of the same address in one clock return the old word.
// Contents are not reset.
//
// Storing J and h is required by the algorithm; the organisation of the
// stores is this design's choice.
module ram_1r1w #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
