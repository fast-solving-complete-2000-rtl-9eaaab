// tb_updown_counter: self-checking test of the saturated up-down counter step
// and the sign function.
//
// Reference: s = Itanh + I; Itanh' = I0-1 if s >= I0, -I0 if s < -I0, else s;
// sigma = (Itanh' >= 0). Covers the two saturation bounds, the exact bound
// values s = I0-1, I0, -I0, -I0-1, sgn(0) = +1, and random cases including
// sums that overflow 16 bits.
module tb_updown_counter;
  localparam int IW = 16;
  logic signed [IW-1:0] itanh_q, field, i0, itanh_d;
  logic sigma;
  int checks = 0, failures = 0;
  int n_hi = 0, n_lo = 0, n_mid = 0;

  updown_counter #(.IW(IW)) dut (.itanh_q(itanh_q), .field(field), .i0(i0), .itanh_d(itanh_d), .sigma(sigma));

  task automatic apply(int q, int f, int t);
    int s, e;
    itanh_q = IW'(q); field = IW'(f); i0 = IW'(t);
    #1;
    s = q + f;
    if (s >= t) begin e = t - 1; n_hi++; end
    else if (s < -t) begin e = -t; n_lo++; end
    else begin e = s; n_mid++; end
    checks++;
    if (int'(itanh_d) != e || sigma != (e >= 0)) begin
      failures++;
      $display("FAIL q=%0d f=%0d i0=%0d: got %0d/%0b expected %0d/%0b", q, f, t, itanh_d, sigma, e, e >= 0);
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
    apply(0, 0, 4);      // sgn(0) = +1
    apply(3, 0, 4);      // s = I0-1, stays
    apply(3, 1, 4);      // s = I0, saturates to I0-1
    apply(-4, 0, 4);     // s = -I0, stays
    apply(-4, -1, 4);    // s = -I0-1, saturates to -I0
    apply(0, -1, 4);     // sign flips to -1
    apply(-1, 1, 1);     // I0 = 1: range -1..0
    apply(0, 5, 1);
    apply(0, -5, 1);
    apply(1023, 32767, 1024);   // 16-bit sum overflow must still saturate high
    apply(-1024, -32768, 1024); // and low
    for (int t = 0; t < 3000; t++) begin
      automatic int i0v = 1 << $urandom_range(0, 10);
      automatic int q = int'($urandom_range(0, 2*i0v - 1)) - i0v;
      automatic int f = int'($urandom_range(0, 4200)) - 2100;
      if (t % 3 == 0) f = int'($urandom_range(0, 2*i0v)) - i0v;
      apply(q, f, i0v);
    end
    if (n_hi == 0 || n_lo == 0 || n_mid == 0) begin
      failures++;
      $display("FAIL coverage hi=%0d lo=%0d mid=%0d", n_hi, n_lo, n_mid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
