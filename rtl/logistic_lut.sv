// logistic_lut: table approximation of the logistic function.
//
// The dot product z (Q.12, so 4096 == 1.0) is clamped to [-8, 8) and cut into
// 64 intervals of width 0.25; entry i holds
//     p[i] = round(255 / (1 + exp(-((i - 32) * 0.25 + 0.125))))
// i.e. the logistic function at the interval centre, with 255 standing for a
// probability of 1. The paper replaces the logistic function with a look-up
// table; its size and resolution here are this design's own. Combinational.
module logistic_lut
  import spirit_pkg::*;
(
  input  acc_t  z,
  output prob_t p
);
  logic signed [ACC_W-1:0] zs;
  logic [5:0]              idx;

  always_comb begin
    zs = z >>> (WGT_FRAC - 2);           // units of 0.25
    if (zs < -32)      idx = 6'd0;
    else if (zs > 31)  idx = 6'd63;
    else               idx = 6'(zs + 32);
  end

  always_comb begin
    case (idx)
       0: p = 8'd  0;  1: p = 8'd  0;  2: p = 8'd  0;  3: p = 8'd  0;  4: p = 8'd  0;  5: p = 8'd  0;  6: p = 8'd  0;  7: p = 8'd  1;
       8: p = 8'd  1;  9: p = 8'd  1; 10: p = 8'd  1; 11: p = 8'd  2; 12: p = 8'd  2; 13: p = 8'd  2; 14: p = 8'd  3; 15: p = 8'd  4;
      16: p = 8'd  5; 17: p = 8'd  7; 18: p = 8'd  8; 19: p = 8'd 11; 20: p = 8'd 14; 21: p = 8'd 17; 22: p = 8'd 22; 23: p = 8'd 27;
      24: p = 8'd 34; 25: p = 8'd 42; 26: p = 8'd 51; 27: p = 8'd 62; 28: p = 8'd 75; 29: p = 8'd 89; 30: p = 8'd104; 31: p = 8'd120;
      32: p = 8'd135; 33: p = 8'd151; 34: p = 8'd166; 35: p = 8'd180; 36: p = 8'd193; 37: p = 8'd204; 38: p = 8'd213; 39: p = 8'd221;
      40: p = 8'd228; 41: p = 8'd233; 42: p = 8'd238; 43: p = 8'd241; 44: p = 8'd244; 45: p = 8'd247; 46: p = 8'd248; 47: p = 8'd250;
      48: p = 8'd251; 49: p = 8'd252; 50: p = 8'd253; 51: p = 8'd253; 52: p = 8'd253; 53: p = 8'd254; 54: p = 8'd254; 55: p = 8'd254;
      56: p = 8'd254; 57: p = 8'd255; 58: p = 8'd255; 59: p = 8'd255; 60: p = 8'd255; 61: p = 8'd255; 62: p = 8'd255; 63: p = 8'd255;
      default: p = 8'd0;
    endcase
  end
endmodule
