// tb_ram_1r1w: self-checking test of the synchronous 1-read 1-write memory.
//
// Writes random words, reads them back with random simultaneous writes
// elsewhere, checks the one-clock read latency, that rdata holds while re is
// low, and that a read of the address being written returns the old word.
module tb_ram_1r1w;
  localparam int WIDTH = 24, DEPTH = 40, AW = $clog2(DEPTH);
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ram_1r1w #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = WIDTH'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      automatic logic [WIDTH-1:0] expct, held;
      automatic int ra = $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      re = 1; raddr = AW'(ra);
      we = ($urandom_range(0, 1) != 0);
      waddr = AW'((t % 5 == 0) ? ra : $urandom_range(0, DEPTH - 1));
      wdata = WIDTH'($urandom);
      expct = model[ra];
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expct) begin failures++; $display("FAIL read %0d: %h expected %h", ra, rdata, expct); end
      held = rdata;
      @(negedge clk); re = 0; we = 0; raddr = AW'($urandom_range(0, DEPTH - 1));
      @(posedge clk); #1;
      checks++;
      if (rdata !== held) begin failures++; $display("FAIL rdata changed while re low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
