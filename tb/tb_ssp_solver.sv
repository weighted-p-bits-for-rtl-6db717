// tb_ssp_solver: the paper's Subset Sum instance on the 15-bit solver at its default size.
// A is constrained to {0, 512}, B to {0, 1024}, C to {0, 2048} by pinning every other bit
// to 0, and the 17-bit sum S is pinned to 3584 = 512 + 1024 + 2048. Over many sweeps the
// histogram of A + B + C is taken. Checks: the constrained bits stay 0, so A + B + C is always
// one of the 8 sums of the sets; every one of the 8 appears (the circuit keeps exploring); and
// the target 3584 is the most frequent value and the wrong sum 1536 the next, as in the
// paper's histogram.
module tb_ssp_solver;
  localparam int NB = 15;
  localparam int A_EL = 512, B_EL = 1024, C_EL = 2048, TARGET = 3584;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] a_sel, a_clamp, b_sel, b_clamp, c_sel, c_clamp;
  logic [NB+1:0] s_sel, s_clamp;
  logic [NB-1:0] a, b, c;
  logic [NB+1:0] s;
  logic sweep;
  int checks = 0, failures = 0;

  ssp_solver dut (
    .clk(clk), .rst_n(rst_n),
    .a_sel(a_sel), .a_clamp(a_clamp), .b_sel(b_sel), .b_clamp(b_clamp),
    .c_sel(c_sel), .c_clamp(c_clamp), .s_sel(s_sel), .s_clamp(s_clamp),
    .a(a), .b(b), .c(c), .s(s), .sweep(sweep));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int hist[8], other, best, nsamp, s_ok;
    // Pin every bit not used by the set's non-zero member to 0; leave that one free.
    a_sel = ~NB'(A_EL); a_clamp = '0;
    b_sel = ~NB'(B_EL); b_clamp = '0;
    c_sel = ~NB'(C_EL); c_clamp = '0;
    s_sel = '1;         s_clamp = (NB+2)'(TARGET);
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    repeat (100) @(posedge clk iff sweep);
    hist = '{default: 0};
    other = 0;
    s_ok = 0;
    nsamp = 100000;
    repeat (nsamp) begin
      int v;
      @(posedge clk iff sweep);
      v = int'(a) + int'(b) + int'(c);
      if (v % 512 == 0 && v / 512 < 8) hist[v / 512]++;
      else other++;
      if (int'(s) == TARGET) s_ok++;
    end
    best = 0;
    for (int k = 0; k < 8; k++) begin
      $display("A+B+C = %4d : %.4f", k * 512, hist[k] / real'(nsamp));
      if (hist[k] > hist[best]) best = k;
      check(hist[k] > 0, $sformatf("value %0d visited", k * 512));
    end
    $display("outside the 8 sums: %0d   S at target: %.4f", other, s_ok / real'(nsamp));
    check(other < nsamp / 1000, "operands stay in their sets");
    check(s_ok > nsamp * 99 / 100, "sum pinned to target");
    check(best * 512 == TARGET, "target is the most frequent sum");
    begin
      int second;
      second = (best == 0) ? 1 : 0;
      for (int k = 0; k < 8; k++) if (k != best && hist[k] > hist[second]) second = k;
      check(second * 512 == 1536, "1536 is the runner-up");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
