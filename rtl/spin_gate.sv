// spin_gate: computes the next state of one spin, sigma_i(t+1).
//
//   I_i(t+1)     = h_i + sum_j J_ij * sigma_j(t) + n_rnd * r_i(t)
//   Itanh_i(t+1) = saturated up-down count of Itanh_i(t) + I_i(t+1)
//   sigma_i(t+1) = sgn(Itanh_i(t+1))
//
// The row J_i,* arrives as a sequence of LANES-wide chunks, one per clock
// when in_valid is high, the first marked by in_first and the last by
// in_last. A local_field_adder forms each chunk's partial sum; an
// accumulator register carries it to the next chunk. On the last chunk the
// bias h_i and the noise term are added and the updown_counter step is taken
// on itanh_q, the stored counter value of spin i. out_valid, itanh_d and
// sigma_out are combinational outputs valid in that same clock, to be written
// back by the caller. itanh_clr makes the counter start from 0 (used in the
// first annealing cycle, so the counter store needs no clearing pass).
//
// The multiplexers, adder, up-down counter and sgn are the algorithm's spin
// gate; feeding the row over several clocks is this design's choice. A row
// may be a single chunk (in_first and in_last together).
module spin_gate #(
  parameter int unsigned LANES = 100,
  parameter int unsigned JW    = 2,
  parameter int unsigned IW    = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_first,
  input  logic                 in_last,
  input  logic [LANES*JW-1:0]  j_row,
  input  logic [LANES-1:0]     sigma_chunk,
  input  logic signed [IW-1:0] h,
  input  logic signed [IW-1:0] noise,
  input  logic signed [IW-1:0] itanh_q,
  input  logic                 itanh_clr,
  input  logic signed [IW-1:0] i0,
  output logic                 out_valid,
  output logic signed [IW-1:0] itanh_d,
  output logic                 sigma_out
);

  logic signed [IW-1:0] part, acc_q, acc_base, acc_d, field, itanh_cur;

  local_field_adder #(.LANES(LANES), .JW(JW), .SW(IW)) u_adder (
    .j_row (j_row),
    .sigma (sigma_chunk),
    .sum   (part)
  );

  assign acc_base  = in_first ? '0 : acc_q;
  assign acc_d     = acc_base + part;
  assign field     = acc_d + h + noise;
  assign itanh_cur = itanh_clr ? '0 : itanh_q;

  updown_counter #(.IW(IW)) u_counter (
    .itanh_q (itanh_cur),
    .field   (field),
    .i0      (i0),
    .itanh_d (itanh_d),
    .sigma   (sigma_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc_q <= '0;
    else if (in_valid) acc_q <= acc_d;
  end

  assign out_valid = in_valid & in_last;

endmodule
