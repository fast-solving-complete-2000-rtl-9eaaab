// sc_sa_top: stochastic-computing simulated annealing (SC-SA) core for Ising
// problems such as MAX-CUT, sized by default for a complete 2000-node graph.
//
// Every annealing cycle the core updates all spins at once from the previous
// states:  I_i = h_i + sum_j J_ij sigma_j + n_rnd r_i,  Itanh_i is stepped by
// I_i inside the saturation bounds [-I0, I0-1], and sigma_i = sgn(Itanh_i).
// The pseudo-inverse temperature I0 rises geometrically from I0min to I0max
// and restarts (i0_scheduler).
//
// Organisation. GATES spin gates (spin_gate) work side by side, each shared
// by N/GATES spins: gate g handles spins g, g+GATES, g+2*GATES, ... Each gate
// has its own bank of stores: a coupling bank holding the rows of its spins
// as N/LANES words of LANES couplings each, a bias bank and a counter bank
// (the value Itanh_i of each of its spins). sweep_ctrl streams the spins
// through the gates GATES at a time, one coupling word per gate per clock,
// and spin_state double-buffers sigma so that a cycle reads only the old
// states. With n = n_chunks*LANES spins in use a cycle takes
// (n/GATES)*n_chunks + 2 clocks: 40,002 clocks for 2000 spins at the
// defaults LANES = 100, GATES = 1. GATES must divide LANES; GATES = LANES =
// N is the fully parallel arrangement, one gate and one adder per spin.
//
// Pipeline: clock 0 issues (group, chunk) and reads J, h, Itanh and the
// sigma chunk; clock 1 the gates sum the chunk and, on the row's last chunk,
// write Itanh_i and sigma_i(t+1) of their spins back.
//
// Host interface (this design's own): while idle, write couplings with j_we
// (j_row, j_chunk, j_wdata holding J[j_row][j_chunk*LANES + k] in bits
// [2k+1:2k]) and biases with h_we; set cfg and pulse start. busy stays high
// until the one-clock done pulse. The counters start from 0 and the spins
// from +1 on every start; the couplings and biases are kept. sigma shows the
// current spin vector (bit 1 = +1), i0 the current integer I0, and iter_end pulses when
// I0 has passed I0max and restarted at I0min (one annealing iteration done).
//
// The equations, the multiplexer/adder/up-down-counter spin gate, the I0
// schedule and the noise term follow the SC-SA algorithm. Time-sharing the
// spin gates, the memory organisation, the LFSR noise source, the widths and
// the host interface are this design's choices.
module sc_sa_top
  import sc_sa_pkg::*;
#(
  parameter int unsigned N     = N_SPINS,
  parameter int unsigned LANES = DEF_LANES,
  parameter int unsigned GATES = DEF_GATES,
  localparam int unsigned CHUNKS = N / LANES,
  localparam int unsigned CW = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned GROUPS = N / GATES,
  localparam int unsigned GW = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned JDEPTH = GROUPS * CHUNKS,
  localparam int unsigned JAW = (JDEPTH > 1) ? $clog2(JDEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // coupling and bias loading
  input  logic                 j_we,
  input  logic [NW-1:0]        j_row,
  input  logic [CW-1:0]        j_chunk,
  input  logic [LANES*JW-1:0]  j_wdata,
  input  logic                 h_we,
  input  logic [NW-1:0]        h_addr,
  input  logic signed [IW-1:0] h_wdata,
  // run control
  input  sc_sa_cfg_t           cfg,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // results
  output logic [N-1:0]         sigma,
  output logic signed [IW-1:0] i0,
  output logic [CYW-1:0]       cycle_count,
  output logic                 iter_end
);

  // ---------------------------------------------------------------- config
  // n_chunks, num_cycles and seed are taken by sweep_ctrl and noise_gen at
  // start; the settings used during the run are latched here.
  logic                     start_ok;
  logic [7:0]               n_rnd_q;
  logic [15:0]              tau_q, inv_beta_q;
  logic [IW+I0_FRAC-1:0]    i0_min_q, i0_max_q;

  assign start_ok = start && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_rnd_q    <= '0;
      tau_q      <= '0;
      inv_beta_q <= '0;
      i0_min_q   <= '0;
      i0_max_q   <= '0;
    end else if (start_ok) begin
      n_rnd_q    <= cfg.n_rnd;
      tau_q      <= cfg.tau;
      inv_beta_q <= cfg.inv_beta;
      i0_min_q   <= cfg.i0_min;
      i0_max_q   <= cfg.i0_max;
    end
  end

  // ------------------------------------------------------------ sequencer
  logic          iss_valid, iss_first, iss_last, cycle_end, first_cycle;
  logic [GW-1:0] iss_group;
  logic [CW-1:0] iss_chunk;

  sweep_ctrl #(.N(N), .LANES(LANES), .P(GATES), .PIPE(2)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (start_ok),
    .n_chunks    (cfg.n_chunks),
    .num_cycles  (cfg.num_cycles),
    .busy        (busy),
    .done        (done),
    .iss_valid   (iss_valid),
    .iss_first   (iss_first),
    .iss_last    (iss_last),
    .iss_group   (iss_group),
    .iss_chunk   (iss_chunk),
    .cycle_end   (cycle_end),
    .first_cycle (first_cycle),
    .cycle_count (cycle_count)
  );

  // ------------------------------------------------------- pipeline stage 1
  logic [GW-1:0] grp1;
  logic          v1, first1, last1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1     <= 1'b0;
      first1 <= 1'b0;
      last1  <= 1'b0;
      grp1   <= '0;
    end else begin
      v1     <= iss_valid;
      first1 <= iss_first;
      last1  <= iss_last;
      grp1   <= iss_group;
    end
  end

  // --------------------------------------------------------- spin vector
  logic [LANES-1:0] sigma_chunk;
  logic [GATES-1:0] gate_valid, gate_sigma;

  spin_state #(.N(N), .LANES(LANES), .P(GATES)) u_spins (
    .clk         (clk),
    .rst_n       (rst_n),
    .init        (start_ok),
    .re          (iss_valid),
    .chunk       (iss_chunk),
    .sigma_chunk (sigma_chunk),
    .we          (gate_valid[0]),
    .wgroup      (grp1),
    .wbits       (gate_sigma),
    .swap        (cycle_end),
    .sigma_all   (sigma)
  );

  // ------------------------------------------------- noise and temperature
  logic signed [IW-1:0] noise [GATES];

  noise_gen #(.IW(IW), .P(GATES)) u_noise (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (start_ok),
    .seed  (cfg.seed),
    .step  (gate_valid[0]),
    .n_rnd (n_rnd_q),
    .noise (noise)
  );

  i0_scheduler #(.IW(IW), .FRAC(I0_FRAC)) u_i0 (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start_ok),
    .tick     (cycle_end),
    .tau      (tau_q),
    .i0_min   (start_ok ? cfg.i0_min : i0_min_q),
    .i0_max   (i0_max_q),
    .inv_beta (inv_beta_q),
    .i0       (i0),
    .wrap     (iter_end)
  );

  // ------------------------------------ one bank of stores per spin gate
  // Spin i is handled by gate i % GATES, in group i / GATES. Its coupling row
  // lives in that gate's J bank at words (i / GATES) * CHUNKS + chunk, its
  // bias and counter value at word i / GATES of the gate's h and Itanh banks.
  logic [GW-1:0]  host_j_grp, host_h_grp;
  logic [JAW-1:0] host_j_addr, iss_j_addr;

  assign host_j_grp  = GW'(j_row / GATES);
  assign host_h_grp  = GW'(h_addr / GATES);
  assign host_j_addr = JAW'(host_j_grp) * JAW'(CHUNKS) + JAW'(j_chunk);
  assign iss_j_addr  = JAW'(iss_group) * JAW'(CHUNKS) + JAW'(iss_chunk);

  for (genvar g = 0; g < GATES; g++) begin : g_gate
    logic [LANES*JW-1:0]  j_rdata;
    logic [IW-1:0]        h_rdata, itanh_rdata;
    logic signed [IW-1:0] itanh_new;
    logic                 j_bank_we, h_bank_we;

    assign j_bank_we = j_we && (32'(j_row) % GATES == g);
    assign h_bank_we = h_we && (32'(h_addr) % GATES == g);

    ram_1r1w #(.WIDTH(LANES*JW), .DEPTH(JDEPTH)) u_jmem (
      .clk   (clk),
      .we    (j_bank_we),
      .waddr (host_j_addr),
      .wdata (j_wdata),
      .re    (iss_valid),
      .raddr (iss_j_addr),
      .rdata (j_rdata)
    );

    ram_1r1w #(.WIDTH(IW), .DEPTH(GROUPS)) u_hmem (
      .clk   (clk),
      .we    (h_bank_we),
      .waddr (host_h_grp),
      .wdata (h_wdata),
      .re    (iss_valid),
      .raddr (iss_group),
      .rdata (h_rdata)
    );

    ram_1r1w #(.WIDTH(IW), .DEPTH(GROUPS)) u_itanh_mem (
      .clk   (clk),
      .we    (gate_valid[g]),
      .waddr (grp1),
      .wdata (itanh_new),
      .re    (iss_valid),
      .raddr (iss_group),
      .rdata (itanh_rdata)
    );

    spin_gate #(.LANES(LANES), .JW(JW), .IW(IW)) u_gate (
      .clk         (clk),
      .rst_n       (rst_n),
      .in_valid    (v1),
      .in_first    (first1),
      .in_last     (last1),
      .j_row       (j_rdata),
      .sigma_chunk (sigma_chunk),
      .h           (signed'(h_rdata)),
      .noise       (noise[g]),
      .itanh_q     (signed'(itanh_rdata)),
      .itanh_clr   (first_cycle),
      .i0          (i0),
      .out_valid   (gate_valid[g]),
      .itanh_d     (itanh_new),
      .sigma_out   (gate_sigma[g])
    );
  end

  if (LANES % GATES != 0) begin : g_bad_gates
    $error("sc_sa_top: LANES must be a multiple of GATES");
  end

  // The stores may only be written while the core is idle.
  assert property (@(posedge clk) disable iff (!rst_n) (j_we || h_we) |-> !busy)
    else $error("sc_sa_top: coupling or bias write while annealing");

endmodule
