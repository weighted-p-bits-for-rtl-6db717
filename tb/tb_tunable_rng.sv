// tb_tunable_rng: for several inputs I, counts how often the p-bit reads 1 over many updates
// and compares with (tanh(I)+1)/2; also checks that the state holds when upd is low and that
// a new state appears on the clock edge after upd.
module tb_tunable_rng;
  import pbit_pkg::*;
  logic clk = 0, rst_n = 0, upd = 0;
  act_t i_in;
  logic m;
  int checks = 0, failures = 0;

  tunable_rng #(.SEED(32'h0BAD_F00D)) dut (.clk(clk), .rst_n(rst_n), .upd(upd), .i_in(i_in), .m(m));

  always #5 clk = ~clk;

  initial begin
    int codes[7] = '{-32, -8, -2, 0, 2, 8, 31};
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    foreach (codes[c]) begin
      int ones;
      real p, e;
      i_in = act_t'(codes[c]);
      upd = 1;
      ones = 0;
      for (int t = 0; t < 40000; t++) begin
        @(negedge clk);
        ones += m;
      end
      upd = 0;
      p = ones / 40000.0;
      e = ($tanh(codes[c] / 4.0) + 1.0) / 2.0;
      $display("I=%6.2f  P(m=1)=%.4f  expected %.4f", codes[c] / 4.0, p, e);
      checks++;
      if (p - e > 0.015 || e - p > 0.015) failures++;
    end
    // Hold: with upd low the state never changes.
    i_in = act_t'(0);
    begin
      logic m0;
      m0 = m;
      repeat (200) begin
        @(negedge clk);
        checks++;
        if (m != m0) failures++;
      end
    end
    // Timing: pinned to the maximum, m becomes 1 right after the first upd edge.
    i_in = act_t'(-32);
    upd = 1; @(negedge clk); upd = 0;
    checks++; if (m != 0) failures++;
    i_in = act_t'(31);
    @(negedge clk);
    checks++; if (m != 0) failures++;   // no upd: still 0
    upd = 1; @(negedge clk); upd = 0;
    checks++; if (m != 1) failures++;   // one edge later: 1
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
