// tb_weight_matrix: random weights, biases and neighbour states; the weighted sum and the
// clamped activation input are compared with integer arithmetic done in the testbench.
// Both overflow directions and pinning are driven and counted.
module tb_weight_matrix;
  import pbit_pkg::*;
  localparam int N_IN = 15;
  logic    [N_IN-1:0] m_in;
  weight_t [N_IN-1:0] j;
  weight_t h, hc;
  logic m_c, sel, clamp;
  wsum_t sum;
  act_t  i_out;
  int checks = 0, failures = 0, n_gt = 0, n_lt = 0, n_pin = 0;

  weight_matrix #(.N_IN(N_IN)) dut (.m_in(m_in), .j(j), .h(h), .m_c(m_c), .hc(hc),
                                    .sel(sel), .clamp(clamp), .sum(sum), .i_out(i_out));

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int acc, expo, bias;
      // bias the weights now and then so that both overflow directions happen
      bias = (t % 3 == 0) ? 30 : (t % 3 == 1) ? -30 : 0;
      for (int k = 0; k < N_IN; k++) begin
        int w;
        w = int'($urandom_range(0, 127)) - 64 + bias;
        if (w > 63) w = 63;
        if (w < -64) w = -64;
        j[k] = weight_t'(w);
      end
      h     = weight_t'($urandom_range(0, 127));
      hc    = weight_t'($urandom_range(0, 127));
      m_in  = N_IN'($urandom);
      m_c   = 1'($urandom);
      sel   = ($urandom_range(0, 7) == 0);
      clamp = 1'($urandom);
      #1;
      acc = int'(h);
      for (int k = 0; k < N_IN; k++) if (m_in[k]) acc += int'(j[k]);
      if (m_c) acc += int'(hc);
      if (sel) begin expo = clamp ? 31 : -32; n_pin++; end
      else if (acc > 31)  begin expo = 31;  n_gt++; end
      else if (acc < -32) begin expo = -32; n_lt++; end
      else expo = acc;
      checks++;
      if (int'(sum) != acc) begin
        failures++;
        if (failures < 10) $display("FAIL sum %0d exp %0d", sum, acc);
      end
      checks++;
      if (int'(i_out) != expo) begin
        failures++;
        if (failures < 10) $display("FAIL out %0d exp %0d", i_out, expo);
      end
    end
    $display("overflow high %0d, overflow low %0d, pinned %0d", n_gt, n_lt, n_pin);
    checks++;
    if (n_gt == 0 || n_lt == 0 || n_pin == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
