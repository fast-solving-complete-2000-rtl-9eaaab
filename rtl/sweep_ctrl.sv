// sweep_ctrl: sequencer of the annealing cycles.
//
// One annealing cycle t -> t+1 updates all n spins from the states of cycle
// t. The spins are handled in groups of P (one spin per spin gate): group g
// holds spins g*P .. g*P+P-1. The controller walks the groups and, inside a
// group, the coupling chunks, issuing one (group, chunk) pair per clock with
// iss_first on chunk 0 and iss_last on chunk n_chunks-1. After the last pair
// of the last group it waits PIPE clocks so the spin gate pipeline has written
// back, then raises cycle_end for one clock (swap the spin buffers, tick the
// I0 scheduler) and increments cycle_count. After num_cycles cycles it
// raises done for one clock and returns to idle; otherwise it starts the next
// cycle at group 0.
//
// Interface: start is taken only when idle; n_chunks (1..N/LANES) and
// num_cycles (0 is taken as 1) are sampled then. busy is high from the clock
// after start until done. first_cycle is high during cycle 0, when the
// counters are read as 0. A cycle lasts (n / P) * n_chunks + PIPE clocks,
// with n = n_chunks * LANES; LANES must be a multiple of P.
//
// The cycle structure (synchronous update of all spins, a fixed number of
// cycles) is the algorithm's; the group/chunk order and timing are this
// design's choice.
module sweep_ctrl #(
  parameter int unsigned N     = 2000,
  parameter int unsigned LANES = 100,
  parameter int unsigned P     = 1,
  parameter int unsigned PIPE  = 2,
  localparam int unsigned CHUNKS = N / LANES,
  localparam int unsigned CW = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned GROUPS = N / P,
  localparam int unsigned NW = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   n_chunks,
  input  logic [31:0]   num_cycles,
  output logic          busy,
  output logic          done,
  output logic          iss_valid,
  output logic          iss_first,
  output logic          iss_last,
  output logic [NW-1:0] iss_group,
  output logic [CW-1:0] iss_chunk,
  output logic          cycle_end,
  output logic          first_cycle,
  output logic [31:0]   cycle_count
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;

  state_t        state_q;
  logic [NW-1:0] grp_q, last_grp_q;
  logic [CW-1:0] chunk_q, last_chunk_q;
  logic [31:0]   target_q;
  logic [7:0]    drain_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      grp_q        <= '0;
      chunk_q      <= '0;
      last_grp_q   <= '0;
      last_chunk_q <= '0;
      target_q     <= '0;
      drain_q      <= '0;
      cycle_count  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (start) begin
            state_q      <= S_RUN;
            grp_q        <= '0;
            chunk_q      <= '0;
            last_chunk_q <= CW'(n_chunks - 16'd1);
            last_grp_q   <= NW'(n_chunks * (LANES / P) - 1);
            target_q     <= (num_cycles == '0) ? 32'd1 : num_cycles;
            cycle_count  <= '0;
          end
        end
        S_RUN: begin
          if (chunk_q == last_chunk_q) begin
            chunk_q <= '0;
            if (grp_q == last_grp_q) begin
              grp_q   <= '0;
              drain_q <= 8'(PIPE - 1);
              state_q <= S_DRAIN;
            end else begin
              grp_q <= grp_q + NW'(1);
            end
          end else begin
            chunk_q <= chunk_q + CW'(1);
          end
        end
        S_DRAIN: begin
          if (drain_q != '0) begin
            drain_q <= drain_q - 8'd1;
          end else begin
            cycle_count <= cycle_count + 32'd1;
            state_q     <= (cycle_count + 32'd1 == target_q) ? S_IDLE : S_RUN;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    iss_valid   = (state_q == S_RUN);
    iss_first   = iss_valid && (chunk_q == '0);
    iss_last    = iss_valid && (chunk_q == last_chunk_q);
    iss_group   = grp_q;
    iss_chunk   = chunk_q;
    cycle_end   = (state_q == S_DRAIN) && (drain_q == '0);
    done        = cycle_end && (cycle_count + 32'd1 == target_q);
    busy        = (state_q != S_IDLE);
    first_cycle = (cycle_count == '0);
  end

  if (LANES % P != 0) begin : g_bad_p
    $error("sweep_ctrl: LANES must be a multiple of P");
  end

  // n_chunks must select at least one and at most N/LANES chunks.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && state_q == S_IDLE) |-> (n_chunks >= 16'd1 && n_chunks <= 16'(CHUNKS)))
    else $error("sweep_ctrl: n_chunks out of range");

endmodule
