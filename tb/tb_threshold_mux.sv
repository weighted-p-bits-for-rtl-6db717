// tb_threshold_mux: exhaustive check of the clamping multiplexer over every 12-bit sum and
// every Select / Clamp combination, against the truth table written out independently.
module tb_threshold_mux;
  import pbit_pkg::*;
  wsum_t i_in;
  logic  sel, clamp;
  act_t  i_out;
  int checks = 0, failures = 0;
  int n_gt = 0, n_lt = 0;

  threshold_mux dut (.i_in(i_in), .sel(sel), .clamp(clamp), .i_out(i_out));

  initial begin
    for (int v = -2048; v < 2048; v++)
      for (int sc = 0; sc < 4; sc++) begin
        int expv;
        i_in  = wsum_t'(v);
        sel   = sc[1];
        clamp = sc[0];
        #1;
        if (sel)          expv = clamp ? 31 : -32;
        else if (v > 31)  begin expv = 31;  n_gt++; end
        else if (v < -32) begin expv = -32; n_lt++; end
        else              expv = v;
        checks++;
        if (int'(i_out) != expv) begin
          failures++;
          if (failures < 10) $display("FAIL sum=%0d S=%0d C=%0d out=%0d exp=%0d",
                                      v, sel, clamp, i_out, expv);
        end
      end
    checks++;
    if (n_gt == 0 || n_lt == 0) failures++;
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
