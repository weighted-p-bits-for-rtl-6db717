// tb_wpbit: drives one weighted p-bit with the sequencer's enable pattern (two cycles on, one
// off) and checks the two-cycle update timing, pinning through Select / Clamp, that a single
// enabled cycle does not update, the overflow clamp, the mC terminal, and the probability of
// reading 1 for a given weighted input against (tanh(I)+1)/2.
module tb_wpbit;
  import pbit_pkg::*;
  localparam int N_IN = 15;
  logic clk = 0, rst_n = 0, en = 0, sel = 0, clamp = 0, m_c = 0;
  logic    [N_IN-1:0] m_in = '0;
  weight_t [N_IN-1:0] j = '0;
  weight_t h = '0, hc = '0;
  logic m;
  int checks = 0, failures = 0;

  wpbit #(.N_IN(N_IN), .SEED(32'h1357_9BDF)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .sel(sel), .clamp(clamp),
    .m_in(m_in), .j(j), .h(h), .m_c(m_c), .hc(hc), .m(m));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // One sequencer turn: en high for two cycles, then one gap cycle.
  task automatic turn();
    en = 1; @(negedge clk); @(negedge clk); en = 0; @(negedge clk);
  endtask

  // Fraction of ones over n turns.
  task automatic measure(input int n, output real p);
    int ones;
    ones = 0;
    repeat (n) begin turn(); ones += m; end
    p = ones / real'(n);
  endtask

  initial begin
    real p, e;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    check(m == 0, "reset state 0");

    // Pinned to 1: not yet after the first enabled edge, set after the second.
    sel = 1; clamp = 1;
    en = 1; @(negedge clk);
    check(m == 0, "no update after first enabled cycle");
    @(negedge clk);
    check(m == 1, "update after second enabled cycle");
    en = 0; @(negedge clk);
    // A single enabled cycle does not update.
    clamp = 0;
    en = 1; @(negedge clk); en = 0; @(negedge clk); @(negedge clk);
    check(m == 1, "single enabled cycle leaves m");
    turn();
    check(m == 0, "pinned to 0");
    repeat (50) begin turn(); check(m == 0, "stays pinned to 0"); end
    clamp = 1;
    repeat (50) begin turn(); check(m == 1, "stays pinned to 1"); end
    sel = 0;

    // I = h + J3 = -1.0 + 1.5 = 0.5
    h = weight_t'(-4); j[3] = weight_t'(6); m_in = 15'b000_0000_0000_1000;
    measure(30000, p);
    e = ($tanh(0.5) + 1) / 2;
    $display("I=0.5: P=%.4f expected %.4f", p, e);
    check(p - e < 0.015 && e - p < 0.015, "sigmoid at 0.5");

    // Neighbour state off: I = -1.0
    m_in = '0;
    measure(30000, p);
    e = ($tanh(-1.0) + 1) / 2;
    $display("I=-1: P=%.4f expected %.4f", p, e);
    check(p - e < 0.015 && e - p < 0.015, "sigmoid at -1");

    // Overflow: 15 x 15.75 + h is far above 7.75, clamped to the top of the table.
    j = {N_IN{weight_t'(63)}}; m_in = '1; h = weight_t'(63);
    measure(2000, p);
    check(p == 1.0, "overflow high clamps to 1");
    j = {N_IN{weight_t'(-64)}}; h = weight_t'(-64);
    measure(2000, p);
    check(p == 0.0, "overflow low clamps to 0");

    // mC terminal: h = -8, hC = +8 -> I = 0 when mC = 1.
    j = '0; m_in = '0; h = weight_t'(-32); hc = weight_t'(32);
    m_c = 1;
    measure(20000, p);
    $display("mC=1: P=%.4f expected 0.5", p);
    check(p > 0.485 && p < 0.515, "mC coupling");
    m_c = 0;
    measure(2000, p);
    check(p < 0.01, "mC off");

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
