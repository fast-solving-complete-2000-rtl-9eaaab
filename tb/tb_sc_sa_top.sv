// tb_sc_sa_top: end-to-end test of the SC-SA core at a reduced size,
// N = 12 spins, LANES = 4 (3 coupling words per row) and GATES = 2 spin
// gates working in parallel.
//
// Run 1 solves the 5-vertex MAX-CUT example (edges 1-2, 1-3, 2-4, 3-4, 3-5,
// 4-5, unit weights) on a problem of n = 8 spins (n_chunks = 2; spins 6 to
// 8 have no couplings). Run 2 solves a complete 12-vertex graph with random
// +/-1 weights on all n = 12 spins (3 chunks per row) with a non-zero bias
// on two spins. Couplings are loaded as J = -w so that the Ising ground
// state is the maximum cut.
//
// After every annealing cycle the spin vector and I0 are compared with the
// reference model (sc_sa_model_pkg); spins beyond n must stay +1. At the end
// of each run the best cut seen must equal the optimum found here by
// exhaustive search (5 for the example graph). The test also counts the
// mechanisms of the design and fails if one never happened: counter
// saturation at +bound and at -bound, both noise signs, multi-chunk rows, a
// reduced problem size, the first-cycle counter clear, an I0 restart
// (iter_end), spin flips, a restart of the core with new settings, and both
// gates finishing spins together.
module tb_sc_sa_top;
  import sc_sa_pkg::*;
  import sc_sa_model_pkg::*;

  localparam int N = 12, L = 4, G = 2, CH = N / L, NW = 4, CW = 2;

  logic clk = 0, rst_n = 0;
  logic j_we = 0, h_we = 0, start = 0;
  logic [NW-1:0] j_row = '0, h_addr = '0;
  logic [CW-1:0] j_chunk = '0;
  logic [L*JW-1:0] j_wdata = '0;
  logic signed [IW-1:0] h_wdata = '0;
  sc_sa_cfg_t cfg;
  logic busy, done, iter_end;
  logic [N-1:0] sigma;
  logic signed [IW-1:0] i0;
  logic [CYW-1:0] cycle_count;

  int checks = 0, failures = 0;
  int n_sat_hi = 0, n_sat_lo = 0, n_noise_p = 0, n_noise_m = 0, n_multichunk = 0;
  int n_small = 0, n_clear = 0, n_wrap = 0, n_flip = 0, n_restart = 0, n_parallel = 0;

  always #5 clk = ~clk;

  sc_sa_top #(.N(N), .LANES(L), .GATES(G)) dut (
    .clk, .rst_n, .j_we, .j_row, .j_chunk, .j_wdata, .h_we, .h_addr, .h_wdata,
    .cfg, .start, .busy, .done, .sigma, .i0, .cycle_count, .iter_end);

  // mechanism monitors on the spin gate
  always @(posedge clk) if (rst_n && dut.gate_valid[0]) begin
    automatic int s0 = int'(dut.g_gate[0].u_gate.itanh_cur) + int'(dut.g_gate[0].u_gate.field);
    automatic int s1 = int'(dut.g_gate[1].u_gate.itanh_cur) + int'(dut.g_gate[1].u_gate.field);
    if (s0 >= int'(dut.i0) || s1 >= int'(dut.i0)) n_sat_hi++;
    if (s0 < -int'(dut.i0) || s1 < -int'(dut.i0)) n_sat_lo++;
    if (dut.noise[0] > 0 || dut.noise[1] > 0) n_noise_p++;
    if (dut.noise[0] < 0 || dut.noise[1] < 0) n_noise_m++;
    if (!dut.first1) n_multichunk++;
    if (dut.g_gate[0].u_gate.itanh_clr) n_clear++;
    if (dut.gate_valid[1]) n_parallel++;
  end
  always @(posedge clk) if (rst_n && iter_end) n_wrap++;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load(sc_sa_model m);
    for (int r = 0; r < N; r++) begin
      for (int c = 0; c < CH; c++) begin
        @(negedge clk);
        j_we = 1; j_row = NW'(r); j_chunk = CW'(c);
        for (int k = 0; k < L; k++)
          j_wdata[2*k +: 2] = (r < m.n && c*L + k < m.n) ? 2'(m.J[r][c*L+k]) : 2'b00;
      end
      @(negedge clk);
      j_we = 0; h_we = 1; h_addr = NW'(r); h_wdata = (r < m.n) ? IW'(m.h[r]) : '0;
    end
    @(negedge clk); h_we = 0;
  endtask

  function automatic longint best_cut(sc_sa_model m);
    longint best = -1000000;
    bit v[] = new[m.n];
    for (int x = 0; x < (1 << m.n); x++) begin
      longint c;
      for (int i = 0; i < m.n; i++) v[i] = x[i];
      c = m.cut_of(v);
      if (c > best) best = c;
    end
    return best;
  endfunction

  task automatic run(sc_sa_model m, int nch, int ncyc, int tau, int imax, int nrnd, int seed);
    longint opt = best_cut(m), best = -1000000;
    bit prev[] = new[m.n];
    cfg = '0;
    cfg.n_chunks = 16'(nch); cfg.num_cycles = 32'(ncyc); cfg.tau = 16'(tau);
    cfg.i0_min = 24'h000100; cfg.i0_max = 24'(imax) << 8; cfg.inv_beta = 16'h0200;
    cfg.n_rnd = 8'(nrnd); cfg.seed = 32'(seed);
    m.start(32'(seed), 256, longint'(imax) << 8, 512, tau, nrnd);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cfg.n_chunks = 16'd1; cfg.seed = 32'hdead;   // settings must have been latched
    chk(busy, "busy after start");
    for (int c = 0; c < ncyc; c++) begin
      bit v[] = new[m.n];
      while (cycle_count != 32'(c + 1)) @(posedge clk);
      #1;
      foreach (prev[i]) prev[i] = m.s[i];
      m.cycle();
      for (int i = 0; i < m.n; i++) begin
        v[i] = sigma[i];
        if (v[i] != prev[i]) n_flip++;
      end
      checks++;
      for (int i = 0; i < N; i++) begin
        bit e = (i < m.n) ? m.s[i] : 1'b1;
        if (sigma[i] != e) begin
          failures++;
          $display("FAIL cycle %0d spin %0d: %0b expected %0b", c, i, sigma[i], e);
          break;
        end
      end
      checks++;
      if (c + 1 < ncyc && int'(i0) != m.i0()) begin
        failures++; $display("FAIL cycle %0d: i0 %0d expected %0d", c, i0, m.i0());
      end
      if (m.cut_of(v) > best) best = m.cut_of(v);
    end
    while (busy) @(posedge clk);
    chk(best == opt, $sformatf("best cut %0d, optimum %0d", best, opt));
    $display("run n=%0d: best cut %0d (optimum %0d), final energy %0d", m.n, best, opt, m.energy_of(m.s));
    if (nch < CH) n_small++;
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sc_sa_model m1, m2;
    int edges[6][2] = '{'{0,1}, '{0,2}, '{1,3}, '{2,3}, '{2,4}, '{3,4}};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // run 1: the 5-vertex example on 8 spins
    m1 = new(8);
    foreach (edges[e]) begin
      m1.J[edges[e][0]][edges[e][1]] = -1;
      m1.J[edges[e][1]][edges[e][0]] = -1;
    end
    load(m1);
    run(m1, 2, 120, 2, 8, 2, 7);

    // run 2: complete 12-vertex graph, random +/-1 weights, two biases
    m2 = new(12);
    for (int i = 0; i < 12; i++)
      for (int j = i + 1; j < 12; j++) begin
        automatic byte w = ($urandom_range(0, 1) != 0) ? 8'sd1 : -8'sd1;
        m2.J[i][j] = -w; m2.J[j][i] = -w;
      end
    m2.h[3] = 1; m2.h[7] = -1;
    load(m2);
    n_restart++;
    run(m2, 3, 400, 4, 32, 4, 12345);

    chk(n_sat_hi > 0, "counter saturated high");
    chk(n_sat_lo > 0, "counter saturated low");
    chk(n_noise_p > 0 && n_noise_m > 0, "both noise signs");
    chk(n_multichunk > 0, "multi-chunk rows");
    chk(n_small > 0, "reduced problem size");
    chk(n_clear > 0, "first-cycle counter clear");
    chk(n_wrap > 0, "I0 restart");
    chk(n_flip > 0, "spin flips");
    chk(n_restart > 0, "restart");
    chk(n_parallel > 0, "two gates finishing together");
    $display("mechanisms: sat_hi=%0d sat_lo=%0d noise+=%0d noise-=%0d multichunk=%0d small=%0d clear=%0d i0_wrap=%0d flips=%0d restart=%0d parallel=%0d",
             n_sat_hi, n_sat_lo, n_noise_p, n_noise_m, n_multichunk, n_small, n_clear, n_wrap, n_flip, n_restart, n_parallel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
