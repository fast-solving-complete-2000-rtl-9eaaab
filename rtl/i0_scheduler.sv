// i0_scheduler: control of the pseudo-inverse temperature I0.
//
// I0 sets the saturation bounds of every spin's up-down counter: small I0
// lets spins flip easily, large I0 freezes them. Annealing runs in
// iterations. Each iteration starts at I0min; every tau annealing cycles I0
// is multiplied by 1/beta, I0(t+tau) = I0(t) / beta, until it reaches I0max.
// At the next step after I0 has reached I0max, a new iteration starts at
// I0min, so I0 follows a saw-tooth of rising geometric ramps.
//
// I0 is held in unsigned fixed point with FRAC fraction bits; i0 is its
// integer part, which the counters use. inv_beta is unsigned Q8.8. A product
// above I0max is clamped to I0max, so the top of every ramp is exactly I0max.
//
// Interface: start (priority over tick) sets I0 = I0min and clears the step
// counter. tick marks the end of one annealing cycle. wrap is a one-clock
// pulse, in the clock after the tick, when an iteration has ended and I0
// returned to I0min. tau of 0 is taken as 1. Inputs must be held stable
// while ticks arrive.
//
// The ramp rule, the range I0min..I0max and the parameters tau and beta are
// the algorithm's; the restart rule at I0max, the clamp and the number
// format are this design's choice. The low 8 bits of the product are
// dropped by the Q8.8 scaling and are intentionally unused.
module i0_scheduler #(
  parameter int unsigned IW   = 16,
  parameter int unsigned FRAC = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 tick,
  input  logic [15:0]          tau,
  input  logic [IW+FRAC-1:0]   i0_min,
  input  logic [IW+FRAC-1:0]   i0_max,
  input  logic [15:0]          inv_beta,
  output logic signed [IW-1:0] i0,
  output logic                 wrap
);

  localparam int unsigned FW = IW + FRAC;

  logic [FW-1:0]    i0_q;
  logic [15:0]      tcnt_q;
  logic [FW+15:0]   prod;
  logic [FW+15-8:0] scaled;
  logic [FW-1:0]    ramp_next;
  logic             step_now;

  assign prod      = i0_q * inv_beta;
  assign scaled    = prod[FW+15:8];
  assign ramp_next = (scaled >= (FW+8)'(i0_max)) ? i0_max : scaled[FW-1:0];
  assign step_now  = (tcnt_q + 16'd1 >= tau);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i0_q   <= '0;
      tcnt_q <= '0;
      wrap   <= 1'b0;
    end else begin
      wrap <= 1'b0;
      if (start) begin
        i0_q   <= i0_min;
        tcnt_q <= '0;
      end else if (tick) begin
        if (step_now) begin
          tcnt_q <= '0;
          if (i0_q >= i0_max) begin
            i0_q <= i0_min;
            wrap <= 1'b1;
          end else begin
            i0_q <= ramp_next;
          end
        end else begin
          tcnt_q <= tcnt_q + 16'd1;
        end
      end
    end
  end

  assign i0 = signed'(i0_q[FW-1:FRAC]);

endmodule
