// updown_counter: one step of the saturated up-down counter that stands in
// for tanh in a stochastic-computing p-bit, followed by the sign function.
//
//   s        = Itanh(t) + I(t+1)
//   Itanh'   = I0 - 1   if s >= I0
//            = -I0      if s < -I0
//            = s        otherwise
//   sigma    = +1 (bit 1) if Itanh' >= 0, else -1 (bit 0)
//
// The counter thus holds 2*I0 states; a larger I0 (a lower temperature) makes
// the spin harder to flip. The sum is formed one bit wider than IW so it
// cannot wrap before it is compared.
//
// Interface: itanh_q is the stored counter value, itanh_d the value to store
// back; i0 must be at least 1. Purely combinational: the counter's register
// is kept outside (in the core, one memory word per spin), so one copy of
// this logic serves every spin in turn. The equations are the algorithm's;
// keeping the state in a memory is this design's choice.
module updown_counter #(
  parameter int unsigned IW = 16
) (
  input  logic signed [IW-1:0] itanh_q,
  input  logic signed [IW-1:0] field,
  input  logic signed [IW-1:0] i0,
  output logic signed [IW-1:0] itanh_d,
  output logic                 sigma
);

  logic signed [IW:0] s, hi, lo;

  always_comb begin
    s  = (IW+1)'(itanh_q) + (IW+1)'(field);
    hi = (IW+1)'(i0);
    lo = -hi;
    if (s >= hi)     itanh_d = i0 - IW'(1);
    else if (s < lo) itanh_d = -i0;
    else             itanh_d = s[IW-1:0];
    sigma = ~itanh_d[IW-1];
  end

endmodule
