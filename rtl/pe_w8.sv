// pe_w8: serial-commutator processing element with a real W8 rotator (PE_W8).
//
// Commutators and half butterfly are those of pe_w4 (pair in on s = 0, 1; sum out
// two cycles after the first sample, rotated difference one cycle later; each
// butterfly result halved with rounding). The difference stream, real part a then
// imaginary part b, goes through a serial rotator that applies W8^k, k = rot:
//   k = 0: 1            k = 1: 0.707(1 - j)
//   k = 2: -j           k = 3: 0.707(-1 - j)
// As in the published PE_W8, the common factor 0.707 is applied at the rotator input
// (mux s2_2 selects 362/512 * x, i.e. four shift-and-add operations: 256+64+32+8+2),
// so the rotator needs no multiplier. Its datapath, in the order of the drawing:
//   m  = s2_2 ? 0.707*dif : dif        r1 <= m        r2 <= -r1
//   A  = s2_3 ? -r1 : r1               B  = s ? r2 : m   (mux driven by S2_1 = s)
//   out = s2_4: 0 -> r1, 1 -> A + B, 2 -> B
// On the real-output cycle (s = 0) r1 = a and m = b; on the imaginary-output cycle
// (s = 1) r1 = b and r2 = -a. Hence
//   k = 0: out r1 (a, b)             k = 1: A + B, s2_3 = 0 (a + b, b - a)
//   k = 2: out B  (b, -a)            k = 3: A + B, s2_3 = 1 (b - a, -b - a)
// with the 0.707 factor applied to a and b for k = 1, 3.
// rot is sampled on the s = 1 cycle of a pair. Latency: 2 cycles.
// The resources and mux names come from the published drawing; that the second
// register takes its input behind the -1 is this design's reading of it, the one with
// which the drawn single '+' adder yields all four rotations.
module pe_w8
  import msc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       s,
  input  cplx_t      din,
  input  logic [1:0] rot,
  output cplx_t      dout
);
  data_t im_d, top_q, bot, sum, dif, m, r1, r2, op_a, op_b, rot_out, re_q;
  logic [1:0] rot_q, k_in;
  logic       s2_2, s2_3;
  logic [1:0] s2_4;
  logic signed [DW+9:0] scaled;
  logic signed [DW:0]   acc;

  assign bot = s ? din.re : im_d;
  assign sum = half_round({top_q[DW-1], top_q} + {bot[DW-1], bot});
  assign dif = half_round({top_q[DW-1], top_q} - {bot[DW-1], bot});

  // rotator controls; the pre-scaler sees the first part of a pair while s = 1,
  // before rot is registered
  assign k_in = s ? rot : rot_q;
  assign s2_2 = k_in[0];
  assign s2_3 = rot_q[1];
  assign s2_4 = (rot_q == 2'd0) ? 2'd0 : (rot_q == 2'd2) ? 2'd2 : 2'd1;

  // 0.707 pre-scaler: 362/512 * dif, rounded
  always_comb begin
    scaled = ((DW+10)'(dif) <<< 8) + ((DW+10)'(dif) <<< 6) + ((DW+10)'(dif) <<< 5)
           + ((DW+10)'(dif) <<< 3) + ((DW+10)'(dif) <<< 1) + (DW+10)'(256);
    m = s2_2 ? data_t'(scaled >>> 9) : dif;
  end

  // serial rotator
  assign op_a = s2_3 ? -r1 : r1;
  assign op_b = s ? r2 : m;
  assign acc  = {op_a[DW-1], op_a} + {op_b[DW-1], op_b};
  always_comb begin
    case (s2_4)
      2'd0:    rot_out = r1;
      2'd2:    rot_out = op_b;
      default: rot_out = acc[DW-1:0];
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      im_d <= '0; top_q <= '0; r1 <= '0; r2 <= '0; re_q <= '0; rot_q <= '0;
    end else if (en) begin
      im_d  <= din.im;
      top_q <= s ? im_d : din.re;
      r1    <= m;
      r2    <= -r1;
      re_q  <= s ? sum : rot_out;
      if (s) rot_q <= rot;
    end
  end

  assign dout.re = re_q;
  assign dout.im = s ? rot_out : sum;
endmodule
