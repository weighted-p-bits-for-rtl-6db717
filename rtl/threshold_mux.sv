// threshold_mux: overflow clamping and external pinning of a weighted p-bit.
//
// The 12-bit weighted sum I_IN is compared with the largest and smallest values the activation
// table accepts (7.75 and -8.00). A 16-way multiplexer then picks the value passed on, with the
// select word {S, C, I_IN > max, I_IN < min} (bit 3 down to bit 0), exactly as the paper's truth
// table and block diagram number the select lines and data inputs:
//   inputs 0, 4          -> I_IN (truncated to s[3][2], it is in range)
//   inputs 1, 5, 8..11   -> min (-8.00)
//   inputs 2, 6, 12..15  -> max (7.75)
// Select S = 1 pins the p-bit: clamp C = 0 forces the minimum (the p-bit then reads 0 almost
// surely), C = 1 forces the maximum. Inputs 3 and 7 (both comparisons true) cannot occur; they
// return min here. Purely combinational.
module threshold_mux
  import pbit_pkg::*;
(
  input  wsum_t i_in,
  input  logic  sel,
  input  logic  clamp,
  output act_t  i_out
);
  logic       gt_max, lt_min;
  logic [3:0] s;
  localparam act_t AMAX = act_t'(ACT_MAX);
  localparam act_t AMIN = act_t'(ACT_MIN);

  assign gt_max = (i_in > ACT_MAX);
  assign lt_min = (i_in < ACT_MIN);
  assign s      = {sel, clamp, gt_max, lt_min};

  always_comb begin
    unique case (s)
      4'd0, 4'd4:                 i_out = act_t'(i_in);
      4'd2, 4'd6,
      4'd12, 4'd13, 4'd14, 4'd15: i_out = AMAX;
      default:                    i_out = AMIN;  // 1, 5, 8..11 (and unreachable 3, 7)
    endcase
  end
endmodule
