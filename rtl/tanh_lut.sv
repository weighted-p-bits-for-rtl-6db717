// tanh_lut: activation function of a p-bit, a 64-entry lookup table.
//
// The input is the clamped weighted sum I in s[3][2] (6 bits, -8.00 .. 7.75 in steps of 0.25).
// The output is z = (tanh(I) + 1) / 2, the probability that the p-bit reads 1, as an unsigned
// 32-bit fraction: entry = min(round(z * 2^32), 2^32 - 1). Comparing z with a uniform 32-bit
// random word then yields 1 with probability z.
//
// The paper specifies the table's input format, the transform to z and a 32-bit output
// described as s[0][31]. Because z is never negative this design spends the sign position of
// that format as one more fraction bit, so the table and the random word share one unsigned
// 32-bit scale. Purely combinational.
module tanh_lut
  import pbit_pkg::*;
(
  input  act_t            i_in,
  output logic [ZW-1:0]   z
);
  always_comb begin
    unique case (i_in)
      6'd 0: z = 32'h80000000;  // I = +0.00
      6'd 1: z = 32'h9f597ea7;  // I = +0.25
      6'd 2: z = 32'hbb26a7af;  // I = +0.50
      6'd 3: z = 32'hd14c8f95;  // I = +0.75
      6'd 4: z = 32'he17bead4;  // I = +1.00
      6'd 5: z = 32'hec948eee;  // I = +1.25
      6'd 6: z = 32'hf3dbe5e2;  // I = +1.50
      6'd 7: z = 32'hf87efe60;  // I = +1.75
      6'd 8: z = 32'hfb654178;  // I = +2.00
      6'd 9: z = 32'hfd2ff5b1;  // I = +2.25
      6'd10: z = 32'hfe496098;  // I = +2.50
      6'd11: z = 32'hfef5426c;  // I = +2.75
      6'd12: z = 32'hff5df444;  // I = +3.00
      6'd13: z = 32'hff9d9e57;  // I = +3.25
      6'd14: z = 32'hffc44b19;  // I = +3.50
      6'd15: z = 32'hffdbc5ea;  // I = +3.75
      6'd16: z = 32'hffea05c2;  // I = +4.00
      6'd17: z = 32'hfff2ab10;  // I = +4.25
      6'd18: z = 32'hfff7e9c8;  // I = +4.50
      6'd19: z = 32'hfffb184a;  // I = +4.75
      6'd20: z = 32'hfffd065a;  // I = +5.00
      6'd21: z = 32'hfffe3207;  // I = +5.25
      6'd22: z = 32'hfffee7cc;  // I = +5.50
      6'd23: z = 32'hffff560c;  // I = +5.75
      6'd24: z = 32'hffff98eb;  // I = +6.00
      6'd25: z = 32'hffffc17a;  // I = +6.25
      6'd26: z = 32'hffffda14;  // I = +6.50
      6'd27: z = 32'hffffe900;  // I = +6.75
      6'd28: z = 32'hfffff20d;  // I = +7.00
      6'd29: z = 32'hfffff78a;  // I = +7.25
      6'd30: z = 32'hfffffade;  // I = +7.50
      6'd31: z = 32'hfffffce3;  // I = +7.75
      6'd32: z = 32'h000001e3;  // I = -8.00
      6'd33: z = 32'h0000031d;  // I = -7.75
      6'd34: z = 32'h00000522;  // I = -7.50
      6'd35: z = 32'h00000876;  // I = -7.25
      6'd36: z = 32'h00000df3;  // I = -7.00
      6'd37: z = 32'h00001700;  // I = -6.75
      6'd38: z = 32'h000025ec;  // I = -6.50
      6'd39: z = 32'h00003e86;  // I = -6.25
      6'd40: z = 32'h00006715;  // I = -6.00
      6'd41: z = 32'h0000a9f4;  // I = -5.75
      6'd42: z = 32'h00011834;  // I = -5.50
      6'd43: z = 32'h0001cdf9;  // I = -5.25
      6'd44: z = 32'h0002f9a6;  // I = -5.00
      6'd45: z = 32'h0004e7b6;  // I = -4.75
      6'd46: z = 32'h00081638;  // I = -4.50
      6'd47: z = 32'h000d54f0;  // I = -4.25
      6'd48: z = 32'h0015fa3e;  // I = -4.00
      6'd49: z = 32'h00243a16;  // I = -3.75
      6'd50: z = 32'h003bb4e7;  // I = -3.50
      6'd51: z = 32'h006261a9;  // I = -3.25
      6'd52: z = 32'h00a20bbc;  // I = -3.00
      6'd53: z = 32'h010abd94;  // I = -2.75
      6'd54: z = 32'h01b69f68;  // I = -2.50
      6'd55: z = 32'h02d00a4f;  // I = -2.25
      6'd56: z = 32'h049abe88;  // I = -2.00
      6'd57: z = 32'h078101a0;  // I = -1.75
      6'd58: z = 32'h0c241a1e;  // I = -1.50
      6'd59: z = 32'h136b7112;  // I = -1.25
      6'd60: z = 32'h1e84152c;  // I = -1.00
      6'd61: z = 32'h2eb3706b;  // I = -0.75
      6'd62: z = 32'h44d95851;  // I = -0.50
      6'd63: z = 32'h60a68159;  // I = -0.25
      default: z = '0;
    endcase
  end
endmodule
