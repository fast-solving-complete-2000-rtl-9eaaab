// tb_noise_gen: self-checking test of the noise source.
//
// Compares the output, step by step, with an LFSR model written here
// (Galois, x^32 + x^22 + x^2 + x + 1, bit 0 selects +n_rnd), checks that
// the output holds when step is low, that seed 0 is replaced by 1, and that
// over 20,000 steps both signs occur with a share between 45 % and 55 %.
// A second instance with P = 4 outputs must present, per step, the next four
// bits of the same stream and advance by four.
module tb_noise_gen;
  localparam int IW = 16;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [31:0] seed = 32'h1234_5678;
  logic [7:0] n_rnd = 8'd32;
  logic signed [IW-1:0] noise1 [1];
  logic signed [IW-1:0] noise4 [4];
  logic signed [IW-1:0] noise;
  logic [31:0] model, model4;
  int checks = 0, failures = 0, plus = 0, minus = 0;

  always #5 clk = ~clk;

  noise_gen #(.IW(IW), .P(1)) dut (.clk, .rst_n, .load, .seed, .step, .n_rnd, .noise(noise1));
  noise_gen #(.IW(IW), .P(4)) dut4 (.clk, .rst_n, .load, .seed, .step, .n_rnd, .noise(noise4));
  assign noise = noise1[0];

  function automatic logic [31:0] next(logic [31:0] s);
    return (s >> 1) ^ (s[0] ? 32'h8020_0003 : 32'h0);
  endfunction

  task automatic cmp();
    int e = model[0] ? int'(n_rnd) : -int'(n_rnd);
    logic [31:0] m = model4;
    checks++;
    if (int'(noise) != e) begin failures++; $display("FAIL noise %0d expected %0d", noise, e); end
    for (int k = 0; k < 4; k++) begin
      e = m[0] ? int'(n_rnd) : -int'(n_rnd);
      checks++;
      if (int'(noise4[k]) != e) begin failures++; $display("FAIL noise4[%0d] %0d expected %0d", k, noise4[k], e); end
      m = next(m);
    end
  endtask

  function automatic logic [31:0] next4(logic [31:0] s);
    return next(next(next(next(s))));
  endfunction

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
    @(negedge clk); load = 1;
    @(negedge clk); load = 0; model = seed; model4 = seed; #1 cmp();
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      step = ($urandom_range(0, 4) != 0);
      n_rnd = (t % 1000 < 500) ? 8'd32 : 8'd4;
      @(posedge clk);
      if (step) begin model = next(model); model4 = next4(model4); end
      #1 cmp();
      if (noise > 0) plus++; else minus++;
    end
    checks++;
    if (plus * 100 < 45 * (plus + minus) || plus * 100 > 55 * (plus + minus)) begin
      failures++; $display("FAIL sign balance plus=%0d minus=%0d", plus, minus);
    end
    // seed 0 must not lock the generator
    @(negedge clk); step = 0; seed = 0; load = 1;
    @(negedge clk); load = 0; model = 32'd1; model4 = 32'd1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk); step = 1;
      @(posedge clk); model = next(model); model4 = next4(model4);
      #1 cmp();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
