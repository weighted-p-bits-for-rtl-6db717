// tb_rca: the 32-bit invertible ripple-carry adder at its default size.
//   adder       - A and B pinned; the per-bit majority of S over many sweeps is A + B
//   subtractor  - S and A pinned; the per-bit majority of B is S - A
//   floating    - nothing pinned but Cin = 0; S + 2^N Cout = A + B exactly in 10 .. 30 % of
//                 sweeps (about 20 % reported for the 32-bit adder)
// Sweeps are counted with the first tile's sweep pulse (one per 15 cycles).
module tb_rca;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] a_sel = '0, a_clamp = '0, b_sel = '0, b_clamp = '0, s_sel = '0, s_clamp = '0;
  logic cout_sel = 0, cout_clamp = 0;
  logic [N-1:0] a, b, s;
  logic cout, sweep;
  int checks = 0, failures = 0;

  // I0 = 1.75: the paper does not give I0 for its adder; at this value about one sweep in
  // five has S - A - B = 0 exactly, the figure the paper reports.
  rca #(.N(N), .I0_Q(7)) dut (
    .clk(clk), .rst_n(rst_n),
    .a_sel(a_sel), .a_clamp(a_clamp), .b_sel(b_sel), .b_clamp(b_clamp),
    .s_sel(s_sel), .s_clamp(s_clamp), .cin_sel(1'b1), .cin_clamp(1'b0),
    .cout_sel(cout_sel), .cout_clamp(cout_clamp),
    .a(a), .b(b), .s(s), .cout(cout), .sweep(sweep));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Per-bit majority of a word over n sweeps.
  task automatic majority(input int n, input bit which_b, output logic [N:0] word);
    int cnt[N+1];
    cnt = '{default: 0};
    repeat (n) begin
      @(posedge clk iff sweep);
      for (int i = 0; i < N; i++) cnt[i] += which_b ? b[i] : s[i];
      cnt[N] += cout;
    end
    for (int i = 0; i <= N; i++) word[i] = (cnt[i] * 2 > n);
  endtask

  initial begin
    logic [N:0] w;
    logic [N-1:0] x, y;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;

    // adder
    for (int t = 0; t < 4; t++) begin
      x = $urandom; y = $urandom;
      a_sel = '1; a_clamp = x; b_sel = '1; b_clamp = y;
      repeat (50) @(posedge clk iff sweep);
      majority(2000, 0, w);
      $display("add  %h + %h = %h, circuit %h", x, y, {1'b0, x} + {1'b0, y}, w);
      check(w == {1'b0, x} + {1'b0, y}, "adder");
    end

    // subtractor: S and A pinned, B floats
    b_sel = '0;
    for (int t = 0; t < 4; t++) begin
      x = $urandom; y = $urandom;
      if (y < x) begin logic [N-1:0] tmp; tmp = x; x = y; y = tmp; end
      a_sel = '1; a_clamp = x; s_sel = '1; s_clamp = y;
      cout_sel = 1; cout_clamp = 0;
      repeat (50) @(posedge clk iff sweep);
      majority(2000, 1, w);
      $display("sub  %h - %h = %h, circuit %h", y, x, y - x, w[N-1:0]);
      check(w[N-1:0] == y - x, "subtractor");
    end

    // floating
    a_sel = '0; s_sel = '0; cout_sel = 0;
    begin
      int hit;
      repeat (200) @(posedge clk iff sweep);
      hit = 0;
      repeat (20000) begin
        @(posedge clk iff sweep);
        if ({cout, s} == {1'b0, a} + {1'b0, b}) hit++;
      end
      $display("floating: S - A - B = 0 in %.3f of sweeps", hit / 20000.0);
      check(hit > 20000 / 10 && hit < 20000 * 3 / 10, "floating adder: S - A - B = 0 in 10..30 %");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
