// tb_sc_sa_gset: the SC-SA core at its default size (2000 spins) running
// 800-vertex sparse MAX-CUT problems of the Gset kind for 1,000 annealing
// cycles each, with the published settings per problem:
//
//   G6-like : 800 vertices, 19,176 edges, weights +/-1, tau 500, I0max 64,  n_rnd 4
//   G14-like: 800 vertices,  4,694 edges, weights +1,   tau 1,   I0max 512, n_rnd 2
//   G18-like: 800 vertices,  4,694 edges, weights +/-1, tau 500, I0max 32,  n_rnd 4
//
// The graphs are drawn here at random with those vertex and edge counts and
// weights (the published instances, with their random, toroidal and planar
// structure, are not reproduced), so the cut values are not comparable with
// published ones. I0min = 1 and 1/beta = 2. The problem uses n_chunks = 8
// of the 20 chunks. After every cycle the 800 spin states are compared with
// the reference model, spins 800..1999 must stay +1, and the cycle must last
// 800 * 8 + 2 clocks. The best cut seen in each run is reported and must be
// positive.
module tb_sc_sa_gset;
  import sc_sa_pkg::*;
  import sc_sa_model_pkg::*;

  localparam int N = N_SPINS, L = DEF_LANES, CH = N / L;
  localparam int NV = 800, NCH = NV / L, NUM_CYCLES = 1000;

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
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random graph with ne distinct edges; signed = weights +/-1, else +1
  function automatic void make_graph(sc_sa_model m, int ne, bit use_neg);
    int placed = 0;
    while (placed < ne) begin
      int a = $urandom_range(0, NV - 1), b = $urandom_range(0, NV - 1);
      if (a != b && m.J[a][b] == 0) begin
        byte w = (!use_neg || $urandom_range(0, 1) != 0) ? 8'sd1 : -8'sd1;
        m.J[a][b] = -w; m.J[b][a] = -w;
        placed++;
      end
    end
  endfunction

  task automatic run_problem(string name, sc_sa_model m, int tau, int imax, int nrnd);
    bit v[] = new[NV];
    longint best = -1000000, cut, t0;
    for (int r = 0; r < NV; r++) begin
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        j_we = 1; j_row = $bits(j_row)'(r); j_chunk = $bits(j_chunk)'(c);
        for (int k = 0; k < L; k++) j_wdata[2*k +: 2] = 2'(m.J[r][c*L+k]);
      end
      @(negedge clk);
      j_we = 0; h_we = 1; h_addr = $bits(h_addr)'(r); h_wdata = '0;
    end
    @(negedge clk); h_we = 0;
    cfg = '0;
    cfg.n_chunks = 16'(NCH); cfg.num_cycles = 32'(NUM_CYCLES); cfg.tau = 16'(tau);
    cfg.i0_min = 24'h000100; cfg.i0_max = 24'(imax) << 8; cfg.inv_beta = 16'h0200;
    cfg.n_rnd = 8'(nrnd); cfg.seed = 32'h0800_0000 + 32'(tau);
    m.start(cfg.seed, 256, longint'(imax) << 8, 512, tau, nrnd);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t0 = clk_count;
    for (int c = 0; c < NUM_CYCLES; c++) begin
      while (cycle_count != 32'(c + 1)) @(posedge clk);
      #1;
      checks++;
      if (clk_count - t0 != longint'(NV * NCH + 2 + (c == 0 ? 1 : 0))) begin
        failures++; $display("FAIL %s cycle %0d took %0d clocks", name, c, clk_count - t0);
      end
      t0 = clk_count;
      m.cycle();
      checks++;
      for (int i = 0; i < N; i++) begin
        bit e = (i < NV) ? m.s[i] : 1'b1;
        if (i < NV) v[i] = sigma[i];
        if (sigma[i] != e) begin
          failures++; $display("FAIL %s cycle %0d spin %0d differs from the model", name, c, i);
          break;
        end
      end
      cut = m.cut_of(v);
      if (cut > best) best = cut;
    end
    while (busy) @(posedge clk);
    checks++;
    if (best <= 0) begin failures++; $display("FAIL %s best cut %0d", name, best); end
    $display("%s: best cut in %0d cycles %0d, final cut %0d, final I0 %0d", name, NUM_CYCLES, best, cut, i0);
  endtask

  initial begin
    sc_sa_model g6, g14, g18;
    process::self().srandom(800);
    repeat (3) @(posedge clk);
    rst_n = 1;
    g6 = new(NV);  make_graph(g6, 19176, 1);
    g14 = new(NV); make_graph(g14, 4694, 0);
    g18 = new(NV); make_graph(g18, 4694, 1);
    run_problem("G6-like",  g6, 500, 64, 4);
    run_problem("G14-like", g14, 1, 512, 2);
    run_problem("G18-like", g18, 500, 32, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
