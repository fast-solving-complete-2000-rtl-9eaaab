// tb_sweep_ctrl: self-checking test of the cycle sequencer with N = 12,
// LANES = 4 (3 chunks per row) and P = 2 spin gates (groups of 2 spins).
//
// Runs 3 cycles on the full size (n_chunks = 3) and 4 cycles on a smaller
// problem (n_chunks = 2). Checks the (row, chunk, first, last) sequence of
// every issue against nested loops, the cycle length (n/P)*n_chunks + PIPE,
// one cycle_end per cycle, first_cycle only in cycle 0, busy, and a single
// done pulse in the clock of the last cycle_end. num_cycles = 0 runs one
// cycle.
module tb_sweep_ctrl;
  localparam int N = 12, LANES = 4, P = 2, PIPE = 2, CW = 2, NW = 3;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] n_chunks = 16'd3;
  logic [31:0] num_cycles = 32'd3;
  logic busy, done, iss_valid, iss_first, iss_last, cycle_end, first_cycle;
  logic [NW-1:0] iss_group;
  logic [CW-1:0] iss_chunk;
  logic [31:0] cycle_count;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sweep_ctrl #(.N(N), .LANES(LANES), .P(P), .PIPE(PIPE)) dut (
    .clk, .rst_n, .start, .n_chunks, .num_cycles, .busy, .done, .iss_valid, .iss_first,
    .iss_last, .iss_group, .iss_chunk, .cycle_end, .first_cycle, .cycle_count);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run(int nch, int ncyc);
    int n = nch * LANES / P, eff = (ncyc == 0) ? 1 : ncyc;
    @(negedge clk); start = 1; n_chunks = 16'(nch); num_cycles = 32'(ncyc);
    @(negedge clk); start = 0; n_chunks = 16'd1; num_cycles = 32'd99;  // must have been latched
    for (int c = 0; c < eff; c++) begin
      int clocks = 0;
      for (int r = 0; r < n; r++)
        for (int k = 0; k < nch; k++) begin
          #1;
          chk(busy && iss_valid && iss_group == NW'(r) && iss_chunk == CW'(k) &&
              iss_first == (k == 0) && iss_last == (k == nch - 1) && !cycle_end,
              $sformatf("issue c%0d r%0d k%0d", c, r, k));
          chk(first_cycle == (c == 0), "first_cycle");
          @(negedge clk); clocks++;
        end
      // drain: PIPE clocks, the last with cycle_end
      for (int d = 0; d < PIPE; d++) begin
        #1;
        chk(!iss_valid && busy, "drain");
        chk(cycle_end == (d == PIPE - 1), "cycle_end");
        chk(done == (d == PIPE - 1 && c == eff - 1), "done");
        @(negedge clk); clocks++;
      end
      chk(cycle_count == 32'(c + 1), "cycle_count");
      chk(clocks == n * nch + PIPE, "cycle length");
    end
    #1 chk(!busy && !iss_valid && !done, "idle after done");
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 chk(!busy && !iss_valid, "idle after reset");
    run(3, 3);
    repeat (3) @(negedge clk);
    run(2, 4);
    run(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
