// tb_i0_scheduler: self-checking test of the I0 schedule.
//
// Case 1: I0min = 1, I0max = 16, 1/beta = 2, tau = 3. The expected
// integer I0 per annealing cycle is 1,1,1,2,2,2,4,4,4,8,8,8,16,16,16 and
// then 1 again (with a wrap pulse), computed here by a model of the rule
// "every tau cycles multiply by 1/beta, clamp to I0max, restart at I0min
// after I0max". Case 2: 1/beta = 1.5, I0min = 1, I0max = 10, tau = 1,
// which exercises the fixed-point product and the clamp (7.59 -> 10).
// Case 3: the paper's K2000 setting tau = 500, I0max = 1024, checked for
// the iteration length of 5,500 cycles.
module tb_i0_scheduler;
  localparam int IW = 16, FRAC = 8;
  logic clk = 0, rst_n = 0, start = 0, tick = 0;
  logic [15:0] tau = 16'd3, inv_beta = 16'h0200;
  logic [IW+FRAC-1:0] i0_min = 24'h000100, i0_max = 24'h001000;
  logic signed [IW-1:0] i0;
  logic wrap;
  int checks = 0, failures = 0, wraps = 0;
  longint model, mcnt;

  always #5 clk = ~clk;

  i0_scheduler #(.IW(IW), .FRAC(FRAC)) dut (.clk, .rst_n, .start, .tick, .tau, .i0_min, .i0_max, .inv_beta, .i0, .wrap);

  // model of one tick; returns 1 on wrap
  function automatic bit model_tick();
    longint t = (tau == 0) ? 1 : tau;
    if (mcnt + 1 >= t) begin
      mcnt = 0;
      if (model >= i0_max) begin model = i0_min; return 1; end
      model = (model * inv_beta) >> 8;
      if (model > i0_max) model = i0_max;
    end else mcnt++;
    return 0;
  endfunction

  task automatic run(int cycles, int gap);
    bit w;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; model = i0_min; mcnt = 0;
    for (int c = 0; c < cycles; c++) begin
      checks++;
      if (int'(i0) != int'(model >> 8)) begin
        failures++; $display("FAIL cycle %0d: i0=%0d expected %0d", c, i0, model >> 8);
      end
      repeat (gap) @(negedge clk);
      tick = 1;
      @(negedge clk); tick = 0;
      w = model_tick();
      checks++;
      if (wrap != w) begin failures++; $display("FAIL cycle %0d: wrap=%0b expected %0b", c, wrap, w); end
      if (wrap) wraps++;
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seen[$];
    repeat (2) @(posedge clk);
    rst_n = 1;
    // case 1: explicit expected sequence as well as the model
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int c = 0; c < 18; c++) begin
      seen.push_back(int'(i0));
      tick = 1; @(negedge clk); tick = 0; @(negedge clk);
    end
    begin
      int exp_seq[18] = '{1,1,1,2,2,2,4,4,4,8,8,8,16,16,16,1,1,1};
      for (int c = 0; c < 18; c++) begin
        checks++;
        if (seen[c] != exp_seq[c]) begin failures++; $display("FAIL seq[%0d]=%0d expected %0d", c, seen[c], exp_seq[c]); end
      end
    end
    run(40, 2);
    // case 2: non-integer 1/beta and clamp
    inv_beta = 16'h0180; i0_max = 24'h000A00; tau = 16'd1;
    run(30, 0);
    // case 3: K2000 setting, iteration length 11 steps of 500 cycles
    inv_beta = 16'h0200; i0_max = 24'd1024 << 8; tau = 16'd500;
    run(11000, 0);
    checks++;
    if (wraps < 4) begin failures++; $display("FAIL too few wraps %0d", wraps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
