// tb_spin_gate: self-checking test of one spin gate with LANES = 4.
//
// Feeds rows of 1 to 5 chunks with random couplings, spin bits, bias, noise,
// stored counter value and I0, one chunk per clock, sometimes with idle
// clocks between chunks. On the last chunk it compares itanh_d and
// sigma_out with the reference I = h + sum J*sigma + noise followed by the
// saturated counter step. Checks out_valid only on last chunks, and that
// itanh_clr makes the step start from 0.
module tb_spin_gate;
  localparam int LANES = 4, JW = 2, IW = 16;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0, itanh_clr = 0;
  logic [LANES*JW-1:0] j_row = '0;
  logic [LANES-1:0] sigma_chunk = '0;
  logic signed [IW-1:0] h = '0, noise = '0, itanh_q = '0, i0 = 16'sd8;
  logic out_valid, sigma_out;
  logic signed [IW-1:0] itanh_d;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  spin_gate #(.LANES(LANES), .JW(JW), .IW(IW)) dut (
    .clk, .rst_n, .in_valid, .in_first, .in_last, .j_row, .sigma_chunk, .h, .noise,
    .itanh_q, .itanh_clr, .i0, .out_valid, .itanh_d, .sigma_out);

  function automatic int sat(int q, int f, int t);
    int s = q + f;
    if (s >= t) return t - 1;
    if (s < -t) return -t;
    return s;
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
    for (int r = 0; r < 300; r++) begin
      automatic int nch = $urandom_range(1, 5);
      automatic int acc = 0, e;
      automatic int hv = int'($urandom_range(0, 8)) - 4;
      automatic int nv = ($urandom_range(0, 1) != 0) ? 4 : -4;
      automatic int i0v = 1 << $urandom_range(0, 6);
      automatic int qv = int'($urandom_range(0, 2*i0v - 1)) - i0v;
      automatic logic clr = ($urandom_range(0, 7) == 0);
      for (int c = 0; c < nch; c++) begin
        // optional idle clock between chunks
        if ($urandom_range(0, 3) == 0) begin
          @(negedge clk);
          in_valid = 0; in_first = 0; in_last = 0;
          j_row = $urandom; sigma_chunk = $urandom;
          #1;
          checks++;
          if (out_valid) begin failures++; $display("FAIL out_valid while idle"); end
        end
        @(negedge clk);
        in_valid = 1; in_first = (c == 0); in_last = (c == nch - 1);
        for (int k = 0; k < LANES; k++) begin
          automatic int jv = int'($urandom_range(0, 2)) - 1;
          j_row[k*JW +: JW] = JW'(jv);
          sigma_chunk[k] = 1'($urandom);
          acc += sigma_chunk[k] ? jv : -jv;
        end
        h = IW'(hv); noise = IW'(nv); i0 = IW'(i0v); itanh_q = IW'(qv); itanh_clr = clr;
        #1;
        checks++;
        if (out_valid != (c == nch - 1)) begin failures++; $display("FAIL out_valid=%0b chunk %0d/%0d", out_valid, c, nch); end
      end
      e = sat(clr ? 0 : qv, acc + hv + nv, i0v);
      checks++;
      if (int'(itanh_d) != e || sigma_out != (e >= 0)) begin
        failures++;
        $display("FAIL row %0d: itanh %0d sigma %0b, expected %0d %0b", r, itanh_d, sigma_out, e, e >= 0);
      end
    end
    @(negedge clk);
    in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
