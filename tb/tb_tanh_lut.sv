// tb_tanh_lut: checks every entry of the activation table against (tanh(I)+1)/2 computed
// with real arithmetic, and that the table is monotonic with 0.5 at I = 0.
module tb_tanh_lut;
  import pbit_pkg::*;
  act_t i_in;
  logic [31:0] z;
  int checks = 0, failures = 0;

  tanh_lut dut (.i_in(i_in), .z(z));

  initial begin
    logic [31:0] prev;
    prev = 0;
    for (int k = -32; k < 32; k++) begin
      real v, e;
      longint exp_code;
      i_in = act_t'(k);
      #1;
      v = k / 4.0;
      e = ($tanh(v) + 1.0) / 2.0 * 4294967296.0;
      exp_code = longint'(e);
      if (exp_code > 64'hFFFF_FFFF) exp_code = 64'hFFFF_FFFF;
      checks++;
      if ((longint'(z) - exp_code) > 2 || (exp_code - longint'(z)) > 2) begin
        failures++;
        $display("FAIL I=%f z=%h expected %h", v, z, exp_code);
      end
      checks++;
      if (k > -32 && z < prev) begin failures++; $display("FAIL not monotonic at %f", v); end
      prev = z;
    end
    i_in = '0; #1;
    checks++;
    if (z != 32'h8000_0000) begin failures++; $display("FAIL z(0) = %h", z); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
