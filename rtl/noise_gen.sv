// noise_gen: the random noise terms n_rnd * r_i(t) of the spin gates.
//
// r_i(t) is a random sign, +1 or -1, so each output is +n_rnd or -n_rnd. The
// signs are taken from one 32-bit Galois LFSR (x^32 + x^22 + x^2 + x + 1):
// output k uses bit 0 of the state k steps ahead of the current one, and a
// step request advances the LFSR by P steps. With P spin gates updating P
// spins per clock, the sequence of signs handed to the spins, in spin order,
// is therefore the same single LFSR bit stream whatever P is. Bit 0 equal to
// 1 gives +n_rnd.
//
// Interface: load (priority over step) sets the LFSR to seed, or to 1 when
// seed is 0 (the all-zero state would lock). noise[k] is combinational from
// the current state and n_rnd. Reset sets the LFSR to 1. The P steps are
// unrolled in logic, so a large P gives a long XOR chain.
//
// The noise term and its magnitude n_rnd come from the algorithm; the sign
// distribution and the LFSR are this design's choice.
module noise_gen #(
  parameter int unsigned IW = 16,
  parameter int unsigned P  = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [31:0]          seed,
  input  logic                 step,
  input  logic [7:0]           n_rnd,
  output logic signed [IW-1:0] noise [P]
);

  logic [31:0] lfsr_q;
  logic [31:0] ahead [P+1];   // ahead[k]: state k steps after lfsr_q

  assign ahead[0] = lfsr_q;
  for (genvar k = 0; k < P; k++) begin : g_ahead
    assign ahead[k+1] = (ahead[k] >> 1) ^ (ahead[k][0] ? sc_sa_pkg::LFSR_TAPS : 32'd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    lfsr_q <= 32'd1;
    else if (load) lfsr_q <= (seed == '0) ? 32'd1 : seed;
    else if (step) lfsr_q <= ahead[P];
  end

  logic signed [IW-1:0] mag;
  assign mag = IW'(n_rnd);

  for (genvar k = 0; k < P; k++) begin : g_out
    assign noise[k] = ahead[k][0] ? mag : -mag;
  end

endmodule
