// tb_full_adder: the 5 p-bit invertible full adder.
//   floating  - the 32 states [Cin B A S Cout] against the Boltzmann law of the bipolar J
//               (the 8 truth-table rows together about 81 %)
//   forward   - each of the 8 input combinations pinned; S and Cout must be the sum
//   inverse   - S and Cout pinned; the inputs must add up to them most of the time
// A complete update takes 15 cycles; the sweep pulse period is checked.
module tb_full_adder;
  import pbit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [4:0] sel = '0, clamp = '0, m;
  logic sweep;
  int checks = 0, failures = 0;

  full_adder dut (.clk(clk), .rst_n(rst_n), .sel(sel), .clamp(clamp), .m_c('0),
                  .m(m), .sweep(sweep));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic real boltz(input int state);
    real e;
    int s[5];
    for (int i = 0; i < 5; i++) s[i] = state[i] ? 1 : -1;
    e = 0;
    for (int i = 0; i < 5; i++)
      for (int k = i + 1; k < 5; k++) e -= J_FA_BIP[i][k] * s[i] * s[k];
    return $exp(-e);
  endfunction

  function automatic bit is_row(input logic [4:0] st);
    return int'(st[FA_CIN]) + int'(st[FA_B]) + int'(st[FA_A]) ==
           int'(st[FA_S]) + 2 * int'(st[FA_COUT]);
  endfunction

  initial begin
    int hist[32];
    real z, p, e, ptt;
    int nsamp, t0, t1;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;

    // sweep period
    @(posedge clk iff sweep); t0 = $time;
    @(posedge clk iff sweep); t1 = $time;
    check(t1 - t0 == 15 * 10, $sformatf("complete update = %0d cycles", (t1 - t0) / 10));

    nsamp = 300000;
    hist = '{default: 0};
    repeat (nsamp) begin @(posedge clk iff sweep); hist[m]++; end
    z = 0;
    for (int st = 0; st < 32; st++) z += boltz(st);
    ptt = 0;
    for (int st = 0; st < 32; st++) begin
      p = hist[st] / real'(nsamp);
      e = boltz(st) / z;
      if (is_row(5'(st))) ptt += p;
      check(p - e < 0.015 && e - p < 0.015, $sformatf("floating state %0d: %.4f vs %.4f", st, p, e));
    end
    $display("floating: truth-table rows %.4f of samples", ptt);
    check(ptt > 0.78 && ptt < 0.84, "truth table dominates");

    // forward
    for (int in = 0; in < 8; in++) begin
      int good;
      sel = 5'b00111;
      clamp = 5'(in);  // Cin, B, A
      repeat (10) @(posedge clk iff sweep);
      good = 0;
      repeat (2000) begin
        @(posedge clk iff sweep);
        if (m[2:0] == 3'(in) && is_row(m)) good++;
      end
      $display("forward Cin,B,A=%b: correct %.3f", 3'(in), good / 2000.0);
      check(good > 2000 * 0.7, "forward addition");
    end

    // inverse: pin S and Cout
    for (int out = 0; out < 4; out++) begin
      int good;
      sel = 5'b11000;
      clamp = {2'(out), 3'b000};
      repeat (10) @(posedge clk iff sweep);
      good = 0;
      repeat (4000) begin
        @(posedge clk iff sweep);
        if (m[4:3] == 2'(out) && is_row(m)) good++;
      end
      $display("inverse Cout,S=%b: consistent inputs %.3f", 2'(out), good / 4000.0);
      check(good > 4000 * 0.6, "inverse addition");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
