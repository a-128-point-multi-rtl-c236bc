// pe_w4: serial-commutator processing element with a -j rotator (PE_W4).
//
// One complex sample arrives per enabled cycle; the two samples of a butterfly pair
// arrive back to back, the first while s = 0 and the second while s = 1. The input
// commutator (one register on the imaginary input, one behind the upper mux) turns
// the pair into (x0.re, x1.re) on the s = 1 cycle and (x0.im, x1.im) on the next, so
// a single real adder and a single real subtractor form the butterfly. Each result is
// halved with rounding, so the FFT as a whole is scaled by 1/128 and cannot overflow.
// The output commutator (mux select !s, one register on the difference branch and one
// on the real output) puts the sum sample out two cycles after x0 went in and the
// difference sample one cycle later. The -j rotator sits after the output register
// and swaps re/im with one negation when it is asked to.
//
// Control: rot is sampled on the s = 1 cycle of a pair; 1 means "multiply the
// difference output of this pair by -j", 0 means no rotation. Latency: 2 cycles.
// The structure (muxes, registers, their input numbering, the -j rotator) follows the
// published PE_W4 diagram; the 1/2 scaling per butterfly and the clock enable are this
// design's own choices.
module pe_w4
  import msc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  s,
  input  cplx_t din,
  input  logic  rot,
  output cplx_t dout
);
  data_t im_d, top_q, bot, sum, dif, dif_d, re_q, im_o;
  logic  rot_q;

  // input commutator and half butterfly
  assign bot = s ? din.re : im_d;
  assign sum = half_round({top_q[DW-1], top_q} + {bot[DW-1], bot});
  assign dif = half_round({top_q[DW-1], top_q} - {bot[DW-1], bot});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      im_d <= '0; top_q <= '0; dif_d <= '0; re_q <= '0; rot_q <= 1'b0;
    end else if (en) begin
      im_d  <= din.im;
      top_q <= s ? im_d : din.re;
      dif_d <= dif;
      re_q  <= s ? sum : dif_d;          // upper output mux, select !s
      if (s) rot_q <= rot;
    end
  end

  // lower output mux, select !s
  assign im_o = s ? dif_d : sum;

  // -j rotator: only the difference sample (on the output while s = 1) is rotated
  always_comb begin
    if (s && rot_q) begin
      dout.re = im_o;
      dout.im = -re_q;
    end else begin
      dout.re = re_q;
      dout.im = im_o;
    end
  end
endmodule
