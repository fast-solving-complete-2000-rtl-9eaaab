// tb_spin_state: self-checking test of the double-buffered spin vector with
// N = 16, LANES = 4 and P = 2 spins written per clock.
//
// Checks that init and reset give all +1, that writes to the next-state
// buffer stay invisible until swap, that swap makes them visible at once,
// and that chunk reads return the right LANES bits one clock after re.
module tb_spin_state;
  localparam int N = 16, LANES = 4, P = 2, CW = 2, GW = 3;
  logic clk = 0, rst_n = 0, init = 0, re = 0, we = 0, swap = 0;
  logic [P-1:0] wbits = '0;
  logic [CW-1:0] chunk = '0;
  logic [GW-1:0] wgroup = '0;
  logic [LANES-1:0] sigma_chunk;
  logic [N-1:0] sigma_all, cur, nxt;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  spin_state #(.N(N), .LANES(LANES), .P(P)) dut (.clk, .rst_n, .init, .re, .chunk, .sigma_chunk, .we, .wgroup, .wbits, .swap, .sigma_all);

  task automatic expect_all(string what);
    checks++;
    if (sigma_all !== cur) begin failures++; $display("FAIL %s: %h expected %h", what, sigma_all, cur); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; cur = '1; nxt = '1;
    #1 expect_all("reset");
    for (int c = 0; c < 30; c++) begin
      // write a random set of next states; cur must not change
      for (int k = 0; k < N / P; k++) begin
        @(negedge clk); we = 1; wgroup = GW'(k); wbits = P'($urandom);
        re = 1; chunk = CW'($urandom_range(0, N/LANES - 1));
        @(posedge clk); nxt[k*P +: P] = wbits;
        #1;
        checks++;
        if (sigma_chunk !== cur[chunk*LANES +: LANES]) begin
          failures++; $display("FAIL chunk %0d: %h expected %h", chunk, sigma_chunk, cur[chunk*LANES +: LANES]);
        end
        expect_all("during writes");
      end
      @(negedge clk); we = 0; re = 0; swap = 1;
      @(posedge clk); cur = nxt;
      #1 expect_all("after swap");
      @(negedge clk); swap = 0;
    end
    @(negedge clk); init = 1;
    @(posedge clk); cur = '1; nxt = '1;
    #1 expect_all("init");
    @(negedge clk); init = 0; swap = 1;
    @(posedge clk); #1 expect_all("swap after init");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
