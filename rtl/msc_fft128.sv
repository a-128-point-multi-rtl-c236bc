// msc_fft128: 128-point, 4-path serial-commutator FFT (radix-2^3 / radix-2^4, DIF).
//
// Four copies of a single-path serial-commutator FFT run side by side, one complex
// sample per path per clock, so a 128-point transform enters in 32 cycles and frames
// may follow each other without gaps (4 samples per clock). Stages 1 to 5 work inside
// each path: a processing element (PE) butterflies two consecutive samples of its
// path and rotates the difference, then a bit-exchange circuit (delay 7, 3, 1, 15)
// reorders the path so that the next stage's butterfly pair is again consecutive.
// Stages 6 and 7 are parallel butterflies (BU2) across paths, with a fixed -j on one
// path between them. The PE types follow the rotations each path needs (Table I of
// the published work): stage 1 PE_W8, stage 2 PE_W4, stage 3 PE_TW (the only general
// complex multipliers), stage 4 PE_W4 / PE_W16 / PE_W8 / PE_W16, stage 5 PE_W4 / PE_W8
// / PE_W4 / PE_W8 on paths 1..4.
//
// Data order (n = b6..b0 is the input index, k the output frequency):
//   input:  on cycle t = (t4..t0) of the frame, path p = 2*b1 + b0 carries x[n] with
//           (b2 b5 b4 b3 b6) = (t4 t3 t2 t1 t0);
//   output: on cycle t of the output frame, path p = 2*b1 + b0 carries X[k]/128 with
//           (b3 b6 b5 b4 b2) = (t4 t3 t2 t1 t0) and k = bit reversal of b6..b0.
// Every butterfly halves its results, so the output is the DFT scaled by 1/128.
// en is a clock enable for the whole pipeline: while it is low nothing moves and the
// input is ignored. The first output frame starts 38 enabled cycles after the first
// input frame; out_valid/out_sop mark valid outputs and the first cycle of a frame.
// Frame alignment starts at reset: the first enabled cycle after reset carries t = 0.
module msc_fft128
  import msc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  cplx_t din  [P],
  output cplx_t dout [P],
  output logic  out_valid,
  output logic  out_sop
);
  logic [4:0] s;
  logic [1:0] rot1;
  logic       rot2;
  tw_t        tw3 [P];
  logic       rot4_b2;
  logic [3:0] psel;

  cplx_t pe1 [P], pm1 [P], pe2 [P], pm2 [P], pe3 [P], pm3 [P];
  cplx_t pe4 [P], pm4 [P], pe5 [P], st6 [P], st6r [P];

  msc_ctrl u_ctrl (
    .clk, .rst_n, .en, .s, .rot1, .rot2, .tw3, .rot4_b2, .psel, .out_valid, .out_sop
  );

  // stages 1 to 3 (radix-2^3 part): identical on all paths
  for (genvar p = 0; p < P; p++) begin : g_r8
    pe_w8  u_pe1 (.clk, .rst_n, .en, .s(s[0]), .din(din[p]), .rot(rot1), .dout(pe1[p]));
    perm_swap #(.K(3)) u_d7 (.clk, .rst_n, .en, .sel(psel[0]), .din(pe1[p]), .dout(pm1[p]));
    pe_w4  u_pe2 (.clk, .rst_n, .en, .s(s[1]), .din(pm1[p]), .rot(rot2), .dout(pe2[p]));
    perm_swap #(.K(2)) u_d3 (.clk, .rst_n, .en, .sel(psel[1]), .din(pe2[p]), .dout(pm2[p]));
    pe_tw  u_pe3 (.clk, .rst_n, .en, .s(s[2]), .din(pm2[p]), .tw(tw3[p]), .dout(pe3[p]));
    perm_swap #(.K(1)) u_d1 (.clk, .rst_n, .en, .sel(psel[2]), .din(pe3[p]), .dout(pm3[p]));
  end

  // stage 4: rotations W16^(4*b2 + p) (Table I):
  //   path 1: W16^0 or W16^4 = -j          -> PE_W4, -j when b2 = 1
  //   path 2: W16^1 or W16^5               -> PE_W16, exponent 1 + 4*b2
  //   path 3: W16^2 or W16^6 = W8^1, W8^3  -> PE_W8, exponent 1 + 2*b2
  //   path 4: W16^3 or W16^7               -> PE_W16, exponent 3 + 4*b2
  pe_w4  u_pe4_0 (.clk, .rst_n, .en, .s(s[3]), .din(pm3[0]), .rot(rot4_b2),         .dout(pe4[0]));
  pe_w16 u_pe4_1 (.clk, .rst_n, .en, .s(s[3]), .din(pm3[1]), .rot({rot4_b2, 2'd1}), .dout(pe4[1]));
  pe_w8  u_pe4_2 (.clk, .rst_n, .en, .s(s[3]), .din(pm3[2]), .rot({rot4_b2, 1'b1}), .dout(pe4[2]));
  pe_w16 u_pe4_3 (.clk, .rst_n, .en, .s(s[3]), .din(pm3[3]), .rot({rot4_b2, 2'd3}), .dout(pe4[3]));

  for (genvar p = 0; p < P; p++) begin : g_d15
    perm_swap #(.K(4)) u_d15 (.clk, .rst_n, .en, .sel(psel[3]), .din(pe4[p]), .dout(pm4[p]));
  end

  // stage 5: fixed rotations W8^p (Table I): none, W8^1, -j, W8^3
  pe_w4  u_pe5_0 (.clk, .rst_n, .en, .s(s[4]), .din(pm4[0]), .rot(1'b0),  .dout(pe5[0]));
  pe_w8  u_pe5_1 (.clk, .rst_n, .en, .s(s[4]), .din(pm4[1]), .rot(2'd1),  .dout(pe5[1]));
  pe_w4  u_pe5_2 (.clk, .rst_n, .en, .s(s[4]), .din(pm4[2]), .rot(1'b1),  .dout(pe5[2]));
  pe_w8  u_pe5_3 (.clk, .rst_n, .en, .s(s[4]), .din(pm4[3]), .rot(2'd3),  .dout(pe5[3]));

  // stage 6: butterflies on b1 (paths 1/3 and 2/4), then -j on the fourth row
  bu2 u_bu6_0 (.clk, .rst_n, .en, .a(pe5[0]), .b(pe5[2]), .y0(st6[0]), .y1(st6[1]));
  bu2 u_bu6_1 (.clk, .rst_n, .en, .a(pe5[1]), .b(pe5[3]), .y0(st6[2]), .y1(st6[3]));

  assign st6r[0] = st6[0];
  assign st6r[1] = st6[1];
  assign st6r[2] = st6[2];
  assign st6r[3] = '{re: st6[3].im, im: -st6[3].re};

  // stage 7: butterflies on b0 (rows 1/3 and 2/4)
  bu2 u_bu7_0 (.clk, .rst_n, .en, .a(st6r[0]), .b(st6r[2]), .y0(dout[0]), .y1(dout[1]));
  bu2 u_bu7_1 (.clk, .rst_n, .en, .a(st6r[1]), .b(st6r[3]), .y0(dout[2]), .y1(dout[3]));
endmodule
