// tb_system_tile: runs the AND gate of three p-bits on a tile and compares its long-run
// statistics with the Boltzmann law computed here from the bipolar J and h:
//   floating       - all 8 states [A B C] against exp(-E) / Z
//   A = B = 1      - the output C must be 1 in about 98 % of sweeps (I0 = 1)
//   C = 0          - A, B spread evenly over 00, 01, 10
// A second, full 4 x 4 tile with random symmetric weights checks the serial update rule: a
// p-bit changes only on the clock edge that ends its second enabled cycle, and its mC
// terminal moves p-bit 0 from 'almost always 0' to 'half the time 1'.
module tb_system_tile;
  import pbit_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- AND gate ----------------
  localparam wmat_t JA = bin_j(J_AND_BIP, 4);
  localparam wvec_t HA = bin_h(J_AND_BIP, H_AND_BIP, 4);
  logic [2:0] a_sel = '0, a_clamp = '0, a_m, a_en;
  logic       a_sweep;

  system_tile #(.N(AND_N), .J(JA), .H(HA), .SEED_BASE(32'hA4D0_0001)) u_and (
    .clk(clk), .rst_n(rst_n), .sel(a_sel), .clamp(a_clamp), .m_c('0),
    .m(a_m), .en(a_en), .sweep(a_sweep));

  // ---------------- 4 x 4 tile ----------------
  function automatic wmat_t rand_sym();
    wmat_t r;
    r = '0;
    for (int i = 0; i < MAX_N; i++)
      for (int k = i + 1; k < MAX_N; k++) begin
        r[i][k] = weight_t'(int'($urandom_range(0, 8)) - 4);
        r[k][i] = r[i][k];
      end
    return r;
  endfunction
  localparam wmat_t JT = '0;  // weights for row 0 zero so that mC alone drives p-bit 0
  localparam wvec_t HT = {{15{weight_t'(2)}}, weight_t'(-32)};
  localparam wvec_t HCT = {{15{weight_t'(0)}}, weight_t'(32)};
  logic [15:0] t_sel = '0, t_clamp = '0, t_mc = '0, t_m, t_en;
  logic        t_sweep;

  system_tile #(.J(JT), .H(HT), .HC(HCT)) u_t16 (
    .clk(clk), .rst_n(rst_n), .sel(t_sel), .clamp(t_clamp), .m_c(t_mc),
    .m(t_m), .en(t_en), .sweep(t_sweep));

  // Serial update rule on the 16-p-bit tile: m[i] may change only on the edge after the
  // second enabled cycle of p-bit i.
  logic [15:0] prev_m, en_d1, en_d2;
  int n_changes = 0;
  always @(posedge clk) if (rst_n) begin
    en_d2 <= en_d1;
    en_d1 <= t_en;
    prev_m <= t_m;
  end
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < 16; i++)
      if (t_m[i] != prev_m[i]) begin
        n_changes++;
        // the edge just passed ended cycle en_d1 (second), preceded by en_d2 (first)
        if (!(en_d1[i] && en_d2[i])) begin
          failures++;
          $display("FAIL p-bit %0d changed outside its update slot", i);
        end
      end
  end

  // ---------------- Boltzmann reference ----------------
  function automatic real boltz(input int state, input int n, input imat_t jb, input ivec_t hb);
    real e;
    int s[16];
    for (int i = 0; i < n; i++) s[i] = state[i] ? 1 : -1;
    e = 0;
    for (int i = 0; i < n; i++) begin
      e -= hb[i] * s[i];
      for (int k = i + 1; k < n; k++) e -= jb[i][k] * s[i] * s[k];
    end
    return $exp(-e);
  endfunction

  initial begin
    int hist[8];
    real z, p, e;
    int nsamp;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    en_d1 = '0; en_d2 = '0; prev_m = '0;

    // Floating AND gate
    nsamp = 400000;
    repeat (100) @(posedge a_sweep);
    hist = '{default: 0};
    repeat (nsamp) begin @(posedge clk iff a_sweep); hist[a_m]++; end
    z = 0;
    for (int st = 0; st < 8; st++) z += boltz(st, 3, J_AND_BIP, H_AND_BIP);
    for (int st = 0; st < 8; st++) begin
      p = hist[st] / real'(nsamp);
      e = boltz(st, 3, J_AND_BIP, H_AND_BIP) / z;
      $display("AND floating [A B C]=%b%b%b  P=%.4f  Boltzmann %.4f", st[0], st[1], st[2], p, e);
      check(p - e < 0.02 && e - p < 0.02, $sformatf("floating state %0d", st));
    end

    // Forward: A = B = 1
    a_sel = 3'b011; a_clamp = 3'b011;
    repeat (20) @(posedge a_sweep);
    hist = '{default: 0};
    repeat (20000) begin @(posedge clk iff a_sweep); hist[a_m]++; end
    p = hist[7] / 20000.0;
    $display("AND A=B=1: P(C=1)=%.4f", p);
    check(hist[3] + hist[7] == 20000, "inputs held at 1");
    check(p > 0.96, "output C follows A AND B");

    // Inverted: C = 0
    a_sel = 3'b100; a_clamp = 3'b000;
    repeat (20) @(posedge a_sweep);
    hist = '{default: 0};
    repeat (30000) begin @(posedge clk iff a_sweep); hist[a_m]++; end
    for (int st = 0; st < 3; st++) begin
      p = hist[st] / 30000.0;
      $display("AND C=0: [A B]=%b%b P=%.4f", st[0], st[1], p);
      check(p > 0.30 && p < 0.365, "inverted AND spreads over 00, 01, 10");
    end
    check(hist[3] < 30000 * 0.02, "A=B=1 rare when C pinned to 0");
    check(hist[4] + hist[5] + hist[6] + hist[7] == 0, "C stays 0");

    // 4 x 4 tile: mC drives p-bit 0
    begin
      int ones;
      ones = 0;
      t_mc = 16'h0000;
      repeat (2000) begin @(posedge clk iff t_sweep); ones += t_m[0]; end
      check(ones < 20, "mC = 0: p-bit 0 almost never 1");
      t_mc = 16'h0001;
      ones = 0;
      repeat (10000) begin @(posedge clk iff t_sweep); ones += t_m[0]; end
      $display("4x4 tile mC=1: P(m0=1)=%.4f", ones / 10000.0);
      check(ones > 4700 && ones < 5300, "mC = 1: p-bit 0 at 0.5");
    end
    check(n_changes > 1000, "16-p-bit tile p-bits change state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
