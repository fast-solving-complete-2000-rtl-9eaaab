// local_field_adder: the multiplier-and-adder front of a spin gate.
//
// For each of LANES couplings J_ij a 2:1 multiplexer selects J_ij when the
// neighbour spin sigma_j is +1 (bit 1) and -J_ij when it is -1 (bit 0), which
// is the product J_ij * sigma_j without a multiplier. The LANES products are
// added by one binary adder into a signed SW-bit partial local field.
//
// Interface: j_row packs lane k in bits [k*JW +: JW] (two's complement);
// sigma[k] is the matching spin. Purely combinational, no clock.
//
// The multiplexer-plus-binary-adder structure is the algorithm's spin gate;
// cutting a row into LANES-wide pieces, so that one adder serves a whole row
// over several clocks, is this design's choice.
module local_field_adder #(
  parameter int unsigned LANES = 100,
  parameter int unsigned JW    = 2,
  parameter int unsigned SW    = 16
) (
  input  logic [LANES*JW-1:0]  j_row,
  input  logic [LANES-1:0]     sigma,
  output logic signed [SW-1:0] sum
);

  logic signed [SW-1:0] prod [LANES];

  for (genvar k = 0; k < LANES; k++) begin : g_lane
    logic signed [SW-1:0] j_ext;
    assign j_ext   = SW'(signed'(j_row[k*JW +: JW]));
    assign prod[k] = sigma[k] ? j_ext : -j_ext;
  end

  always_comb begin
    sum = '0;
    for (int k = 0; k < LANES; k++) sum = sum + prod[k];
  end

endmodule
