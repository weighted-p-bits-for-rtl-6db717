// tb_lfsr32: checks the 32-bit XNOR LFSR against a bit-level model of the Xilinx-style
// taps (32, 22, 2, 1), checks that it holds when not advanced, that it returns to its
// seed, and that its top bit is balanced over a long run.
module tb_lfsr32;
  logic clk = 0, rst_n = 0, adv = 0;
  logic [31:0] q, model;
  int checks = 0, failures = 0;
  localparam logic [31:0] SEED = 32'hDEAD_BEEF;

  lfsr32 #(.SEED(SEED)) dut (.clk(clk), .rst_n(rst_n), .adv(adv), .q(q));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Model: stage k is model[k-1]; new stage 1 = XNOR of stages 32, 22, 2, 1.
  function automatic logic [31:0] step(input logic [31:0] s);
    logic nb;
    nb = !(s[31] ^ s[21] ^ s[1] ^ s[0]);
    return {s[30:0], nb};
  endfunction

  initial begin
    int ones;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(q == SEED, "reset loads seed");
    model = SEED;
    adv = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      model = step(model);
      check(q == model, $sformatf("step %0d: %h vs %h", t, q, model));
    end
    adv = 0;
    repeat (5) @(negedge clk);
    check(q == model, "holds when adv low");
    check(q != '1, "never all ones");
    // Balance of the top bit over 100k steps.
    adv = 1;
    ones = 0;
    for (int t = 0; t < 100000; t++) begin
      @(negedge clk);
      ones += q[31];
      if (q == '1) check(0, "lock-up state reached");
    end
    check(ones > 49000 && ones < 51000, $sformatf("top bit balance %0d/100000", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
