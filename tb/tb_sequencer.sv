// tb_sequencer: checks the enable pattern of the 16 p-bit sequencer and of the 3 p-bit one of
// the AND gate: one enable at a time, each high for exactly two cycles, a one-cycle gap, in
// order 0, 1, ..., N-1, a full sweep every 3N cycles, sweep pulsing in its last cycle.
module tb_sequencer;
  logic clk = 0, rst_n = 0;
  logic [15:0] en16;
  logic [2:0]  en3;
  logic sw16, sw3;
  int checks = 0, failures = 0;

  sequencer #(.N(16)) dut16 (.clk(clk), .rst_n(rst_n), .en(en16), .sweep(sw16));
  sequencer #(.N(3))  dut3  (.clk(clk), .rst_n(rst_n), .en(en3),  .sweep(sw3));

  always #5 clk = ~clk;

  // Expected enable at cycle t after reset for N p-bits.
  function automatic int exp_en(input int n, input int t);
    int ph;
    ph = t % (3 * n);
    return (ph % 3 == 2) ? -1 : ph / 3;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 48 * 20; t++) begin
      int e16, e3;
      e16 = exp_en(16, t);
      e3  = exp_en(3, t);
      checks++;
      if (en16 != ((e16 < 0) ? 16'h0 : 16'(1) << e16)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d en16=%h exp %0d", t, en16, e16);
      end
      checks++;
      if (en3 != ((e3 < 0) ? 3'h0 : 3'(1) << e3)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d en3=%b exp %0d", t, en3, e3);
      end
      checks++;
      if (sw16 != (t % 48 == 47) || sw3 != (t % 9 == 8)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d sweep %b %b", t, sw16, sw3);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
