// pe_tw: serial-commutator processing element with a general complex rotator (PE_TW).
//
// Commutators and half butterfly are those of pe_w4 (pair in on s = 0, 1; sum out two
// cycles after the first sample, difference one cycle later; each butterfly result
// halved with rounding). Behind the output register a complex multiplier with four
// real multipliers and two adders rotates every output sample, sum and difference
// alike, by the twiddle tw = c - j*s (coefficients with TW_FRAC fractional bits):
//   re' = re*c + im*s,   im' = im*c - re*s,  each divided by 2^TW_FRAC with rounding.
// tw must be presented in the same cycle as the output sample it applies to, i.e. two
// cycles after the input sample it belongs to. Latency: 2 cycles; the multiplier is
// combinational, as in the published PE_TW drawing, which shows no register after it.
module pe_tw
  import msc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  s,
  input  cplx_t din,
  input  tw_t   tw,
  output cplx_t dout
);
  data_t im_d, top_q, bot, sum, dif, dif_d, re_q, im_o;
  logic signed [DW+TW_W:0] pr, pi;

  assign bot = s ? din.re : im_d;
  assign sum = half_round({top_q[DW-1], top_q} + {bot[DW-1], bot});
  assign dif = half_round({top_q[DW-1], top_q} - {bot[DW-1], bot});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      im_d <= '0; top_q <= '0; dif_d <= '0; re_q <= '0;
    end else if (en) begin
      im_d  <= din.im;
      top_q <= s ? im_d : din.re;
      dif_d <= dif;
      re_q  <= s ? sum : dif_d;
    end
  end

  assign im_o = s ? dif_d : sum;

  // complex multiplier
  always_comb begin
    pr = (DW+TW_W+1)'(re_q) * (DW+TW_W+1)'(tw.c) + (DW+TW_W+1)'(im_o) * (DW+TW_W+1)'(tw.s);
    pi = (DW+TW_W+1)'(im_o) * (DW+TW_W+1)'(tw.c) - (DW+TW_W+1)'(re_q) * (DW+TW_W+1)'(tw.s);
    pr = (pr + (DW+TW_W+1)'(1 << (TW_FRAC-1))) >>> TW_FRAC;
    pi = (pi + (DW+TW_W+1)'(1 << (TW_FRAC-1))) >>> TW_FRAC;
    dout.re = pr[DW-1:0];
    dout.im = pi[DW-1:0];
  end
endmodule
