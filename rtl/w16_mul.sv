// w16_mul: multiplierless product of a data word by one of the three magnitudes that
// the W16 twiddles need, in units of 1/512:
//   sel = 0 -> 473*x  (cos 22.5 deg),  sel = 1 -> 362*x  (cos 45 deg),
//   sel = 2 -> 196*x  (sin 22.5 deg).
// It follows the shift-and-add network printed for W16_MUL: 5x = x + 4x is formed once,
// and the result is big - mid + low with
//   sel 0: 512x - 40x  + x,   sel 1: 512x - 160x + 10x,   sel 2: 256x - 64x + 4x,
// so three adders in all. The output is the full-precision product (not divided by
// 512); the caller scales. Purely combinational. sel = 3 is unused and behaves as 2.
module w16_mul
  import msc_pkg::*;
(
  input  data_t                 x,
  input  logic [1:0]            sel,
  output logic signed [DW+10:0] y
);
  typedef logic signed [DW+10:0] wide_t;

  wide_t x1, x4, x5, big, mid, low;

  always_comb begin
    x1 = wide_t'(x);
    x4 = x1 <<< 2;
    x5 = x1 + x4;
    case (sel)
      2'd0: begin big = x1 <<< 9; mid = x5 <<< 3; low = x1;       end
      2'd1: begin big = x1 <<< 9; mid = x5 <<< 5; low = x5 <<< 1; end
      default: begin big = x1 <<< 8; mid = x1 <<< 6; low = x4;   end
    endcase
    y = big - mid + low;
  end
endmodule
