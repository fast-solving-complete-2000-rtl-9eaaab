// tb_local_field_adder: self-checking test of the multiplexer-and-adder
// front of the spin gate, at the default LANES = 100.
//
// Drives random couplings in {-1,0,+1} (and sometimes -2) with random spin
// bits, plus the all-+1 and all-(-1) corner cases, and compares the sum with
// sum_k J_k * (sigma_k ? +1 : -1) computed here with plain integers.
module tb_local_field_adder;
  localparam int LANES = 100;
  localparam int JW = 2;
  localparam int SW = 16;

  logic [LANES*JW-1:0]  j_row;
  logic [LANES-1:0]     sigma;
  logic signed [SW-1:0] sum;
  int checks = 0, failures = 0;

  local_field_adder #(.LANES(LANES), .JW(JW), .SW(SW)) dut (.j_row(j_row), .sigma(sigma), .sum(sum));

  function automatic int ref_sum();
    int s = 0;
    for (int k = 0; k < LANES; k++) begin
      int j = int'($signed(j_row[k*JW +: JW]));
      s += sigma[k] ? j : -j;
    end
    return s;
  endfunction

  task automatic check(string what);
    #1;
    checks++;
    if (int'(sum) != ref_sum()) begin
      failures++;
      $display("FAIL %s: sum=%0d expected=%0d", what, sum, ref_sum());
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // every coupling +1, every spin +1: sum = LANES
    for (int k = 0; k < LANES; k++) j_row[k*JW +: JW] = 2'b01;
    sigma = '1;
    check("all +1");
    if (sum != SW'(LANES)) begin failures++; $display("FAIL all +1 not %0d", LANES); end
    sigma = '0;
    check("all spins -1");
    for (int k = 0; k < LANES; k++) j_row[k*JW +: JW] = 2'b11;
    check("J -1, spins -1");
    for (int t = 0; t < 400; t++) begin
      for (int k = 0; k < LANES; k++) begin
        automatic int r = $urandom_range(0, 9);
        j_row[k*JW +: JW] = (r < 4) ? 2'b01 : (r < 8) ? 2'b11 : (r < 9) ? 2'b00 : 2'b10;
        sigma[k] = 1'($urandom);
      end
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
