// pe_w16: serial-commutator processing element with a real W16 rotator (PE_W16).
//
// Commutators and half butterfly are those of pe_w4 (pair in on s = 0, 1; sum out two
// cycles after the first sample, rotated difference one cycle later; each butterfly
// result halved with rounding). The difference stream (real part a, then imaginary
// part b) is rotated by W16^k, k = rot (0..7). With C = 473, H = 362, S = 196 (all /512),
// W16^1 = (C - jS), W16^2 = H(1 - j), W16^3 = (S - jC) and W16^(k+4) = -j W16^k.
// The rotator, in the order of the published drawing:
//   r1 <= dif          r2 <= -r1
//   op1 = s3_2 ? -r1 : r1              op2 = s ? r2 : dif   (mux driven by S3_1 = s)
//   sum = W16_MUL(op1, s3_3) + W16_MUL(op2, s3_4), divided by 512 with rounding
//   out = s3_5: 0 -> r1, 1 -> sum, 2 -> op2
// On the real-output cycle (s = 0) r1 = a and op2 = b; on the imaginary-output cycle
// (s = 1) r1 = b and op2 = r2 = -a. So for W16^1: re = C*a + S*b, im = C*b - S*a,
// and for W16^5: re = -S*a + C*b, im = -S*b - C*a, and so on; k = 0 passes r1
// (a, b) and k = 4 passes op2 (b, -a). W16_MUL constants: 0 -> 473, 1 -> 362, 2 -> 196.
// rot is sampled on the s = 1 cycle of a pair. Latency: 2 cycles.
// The resources and control names come from the published drawing (two W16_MUL, -1,
// muxes S3_1..S3_5, one '+' adder); that the second register takes its input behind
// the -1 is this design's reading of the drawing, the one with which the single adder
// yields every rotation.
module pe_w16
  import msc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       s,
  input  cplx_t      din,
  input  logic [2:0] rot,
  output cplx_t      dout
);
  data_t im_d, top_q, bot, sum, dif, r1, r2, rot_out, re_q, op1, op2;
  logic [2:0] rot_q;
  logic       s3_2;
  logic [1:0] s3_3, s3_4, s3_5;
  logic signed [DW+10:0] p1, p2;
  logic signed [DW+11:0] acc, acc_r;

  assign bot = s ? din.re : im_d;
  assign sum = half_round({top_q[DW-1], top_q} + {bot[DW-1], bot});
  assign dif = half_round({top_q[DW-1], top_q} - {bot[DW-1], bot});

  // rotator controls: sign of the first operand, constants of the two multipliers
  // (0: 473, 1: 362, 2: 196) and the output selection
  always_comb begin
    s3_2 = rot_q[2];
    case (rot_q[1:0])
      2'd1:    begin s3_3 = rot_q[2] ? 2'd2 : 2'd0; s3_4 = rot_q[2] ? 2'd0 : 2'd2; end
      2'd3:    begin s3_3 = rot_q[2] ? 2'd0 : 2'd2; s3_4 = rot_q[2] ? 2'd2 : 2'd0; end
      default: begin s3_3 = 2'd1;                   s3_4 = 2'd1;                   end
    endcase
    s3_5 = (rot_q == 3'd0) ? 2'd0 : (rot_q == 3'd4) ? 2'd2 : 2'd1;
  end

  assign op1 = s3_2 ? -r1 : r1;
  assign op2 = s ? r2 : dif;

  w16_mul u_m1 (.x(op1), .sel(s3_3), .y(p1));
  w16_mul u_m2 (.x(op2), .sel(s3_4), .y(p2));

  always_comb begin
    acc   = (DW+12)'(p1) + (DW+12)'(p2);
    acc_r = (acc + (DW+12)'(256)) >>> 9;
    case (s3_5)
      2'd0:    rot_out = r1;
      2'd2:    rot_out = op2;
      default: rot_out = acc_r[DW-1:0];
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      im_d <= '0; top_q <= '0; r1 <= '0; r2 <= '0; re_q <= '0; rot_q <= '0;
    end else if (en) begin
      im_d  <= din.im;
      top_q <= s ? im_d : din.re;
      r1    <= dif;
      r2    <= -r1;
      re_q  <= s ? sum : rot_out;
      if (s) rot_q <= rot;
    end
  end

  assign dout.re = re_q;
  assign dout.im = s ? rot_out : sum;
endmodule
