// tb_sc_sa_full: the SC-SA core at its default size (2000 spins, LANES =
// 100) on a complete 2000-vertex graph with random +/-1 edge weights, the
// kind of problem the core is sized for (1,999,000 edges).
//
// The weights are drawn here with a fixed seed (the published K2000 instance
// is not reproduced) and loaded as J = -w, h = 0. Settings: n_rnd = 32 and
// I0max = 1024 as for K2000, I0min = 1, 1/beta = 2, and tau = 10 instead of
// 500 so that one whole I0 ramp (1, 2, 4, ..., 1024, eleven steps) fits in
// the NUM_CYCLES = 110 cycles simulated. After every cycle the 2000 spin states
// and I0 are compared with the reference model; the cycle length must be
// 2000 * 20 + 2 clocks (one more for the first, which includes the start
// clock). At the end the cut must have risen well above that
// of the starting state (all spins equal, cut 0): at least 30,000, about
// 90 % of the best known cut of the published K2000 instance (33,337).
module tb_sc_sa_full;
  import sc_sa_pkg::*;
  import sc_sa_model_pkg::*;

  localparam int N = N_SPINS, L = DEF_LANES, CH = N / L;
  localparam int NUM_CYCLES = 110;

  logic clk = 0, rst_n = 0;
  logic j_we = 0, h_we = 0, start = 0;
  logic [$clog2(N)-1:0] j_row = '0, h_addr = '0;
  logic [$clog2(CH)-1:0] j_chunk = '0;
  logic [L*JW-1:0] j_wdata = '0;
  logic signed [IW-1:0] h_wdata = '0;
  sc_sa_cfg_t cfg;
  logic busy, done, iter_end;
  logic [N-1:0] sigma;
  logic signed [IW-1:0] i0;
  logic [CYW-1:0] cycle_count;
  int checks = 0, failures = 0;
  longint clk_count = 0;

  always #5 clk = ~clk;
  always @(posedge clk) clk_count++;

  sc_sa_top dut (
    .clk, .rst_n, .j_we, .j_row, .j_chunk, .j_wdata, .h_we, .h_addr, .h_wdata,
    .cfg, .start, .busy, .done, .sigma, .i0, .cycle_count, .iter_end);

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sc_sa_model m;
    bit v[];
    longint cut, t0;
    process::self().srandom(2000);
    m = new(N);
    v = new[N];
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++) begin
        automatic byte w = ($urandom_range(0, 1) != 0) ? 8'sd1 : -8'sd1;
        m.J[i][j] = -w; m.J[j][i] = -w;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++) begin
      for (int c = 0; c < CH; c++) begin
        @(negedge clk);
        j_we = 1; j_row = $bits(j_row)'(r); j_chunk = $bits(j_chunk)'(c);
        for (int k = 0; k < L; k++) j_wdata[2*k +: 2] = 2'(m.J[r][c*L+k]);
      end
      @(negedge clk);
      j_we = 0; h_we = 1; h_addr = $bits(h_addr)'(r); h_wdata = '0;
    end
    @(negedge clk); h_we = 0;

    cfg = '0;
    cfg.n_chunks = 16'(CH); cfg.num_cycles = 32'(NUM_CYCLES); cfg.tau = 16'd10;
    cfg.i0_min = 24'h000100; cfg.i0_max = 24'd1024 << 8; cfg.inv_beta = 16'h0200;
    cfg.n_rnd = 8'd32; cfg.seed = 32'h2000_0001;
    m.start(cfg.seed, 256, 1024 << 8, 512, 10, 32);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t0 = clk_count;
    for (int c = 0; c < NUM_CYCLES; c++) begin
      while (cycle_count != 32'(c + 1)) @(posedge clk);
      #1;
      checks++;
      if (clk_count - t0 != longint'(N * CH + 2 + (c == 0 ? 1 : 0))) begin
        failures++; $display("FAIL cycle %0d took %0d clocks", c, clk_count - t0);
      end
      t0 = clk_count;
      m.cycle();
      checks++;
      for (int i = 0; i < N; i++) begin
        v[i] = sigma[i];
        if (sigma[i] != m.s[i]) begin
          failures++; $display("FAIL cycle %0d spin %0d differs from the model", c, i);
          break;
        end
      end
      checks++;
      if (c + 1 < NUM_CYCLES && int'(i0) != m.i0()) begin
        failures++; $display("FAIL cycle %0d: i0 %0d expected %0d", c, i0, m.i0());
      end
      cut = m.cut_of(v);
      if ((c + 1) % 10 == 0) $display("cycle %0d: cut %0d, next I0 %0d", c + 1, cut, i0);
    end
    while (busy) @(posedge clk);
    checks++;
    if (cut < 30000) begin failures++; $display("FAIL final cut %0d below 30000", cut); end
    $display("final cut %0d, energy %0d", cut, m.energy_of(v));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
