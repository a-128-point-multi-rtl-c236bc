// msc_ctrl: control unit of the 128-point 4-path serial-commutator FFT.
//
// A 5-bit counter advances on every enabled cycle; its value is the time index, within
// the 32-cycle frame, of the samples now at the FFT input. Every stage sees the same
// stream delayed by the latencies in front of it (PE 2 cycles, permutations 7, 3, 1,
// 15 cycles, each BU2 1 cycle), so each control signal is a function of the counter
// minus a fixed offset. The meaning of the time-index bits at each point follows the
// bit labels of the published architecture; the index n = b6..b0 of a sample is
//   stage 1 in: time (b2 b5 b4 b3 b6), stage 2 in: (b2 b6 b4 b3 b5),
//   stage 3 in: (b2 b6 b5 b3 b4),     stage 4 in: (b2 b6 b5 b4 b3),
//   stage 5..7: (b3 b6 b5 b4 b2),     path = 2*b1 + b0 in stages 1..5.
// Outputs:
//   s[i]      commutator phase of the PE of stage i+1 (bit 0 of its input time)
//   rot1      W8 exponent of stage 1: 2*b5 + b4 of the pair
//   rot2      -j enable of stage 2: b4 of the pair
//   tw3[p]    twiddle W128^(n2*k1) for the stage-3 output sample on path p, with
//             n2 = (b3 b2 b1 b0) and k1 = (b4 b5 b6), the radix-2^3 / 2^4 split
//   rot4_b2   index bit b2 of the stage-4 pair; stage 4 rotates path p by
//             W16^(4*b2 + p) (Table I), so this one bit sets all four rotators
//   psel[i]   mux select of the permutation after stage i+1 (0 when the sample
//             entering it has time bit 0 = 0 and time bit K = 1)
//   out_valid first asserted once the first input sample has reached the output
//             (38 enabled cycles); out_sop marks time index 0 of an output frame.
// The published work names the control signals but does not describe how they are
// produced; this counter-based unit is this design's own.
module msc_ctrl
  import msc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  output logic [4:0] s,
  output logic [1:0] rot1,
  output logic       rot2,
  output tw_t        tw3 [P],
  output logic       rot4_b2,
  output logic [3:0] psel,
  output logic       out_valid,
  output logic       out_sop
);
  localparam int LAT = 38;

  logic [4:0] cnt;
  logic [5:0] fill;
  logic [4:0] t1, t2, t3, t4, t5, tp1, tp2, tp3, tp4, to3, tout;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      fill <= '0;
    end else if (en) begin
      cnt <= cnt + 5'd1;
      if (fill != 6'(LAT)) fill <= fill + 6'd1;
    end
  end

  // time index at the input of each unit
  assign t1   = cnt;
  assign tp1  = cnt - 5'd2;
  assign t2   = cnt - 5'd9;
  assign tp2  = cnt - 5'd11;
  assign t3   = cnt - 5'd14;
  assign to3  = cnt - 5'd16;
  assign tp3  = cnt - 5'd16;
  assign t4   = cnt - 5'd17;
  assign tp4  = cnt - 5'd19;
  assign t5   = cnt - 5'd2;     // 34 cycles, modulo 32
  assign tout = cnt - 5'(LAT);

  assign s = {t5[0], t4[0], t3[0], t2[0], t1[0]};

  assign rot1 = {t1[3], t1[2]};          // b5 b4
  assign rot2 = t2[2];                   // b4

  // stage-3 twiddles
  always_comb begin
    logic [3:0] n2;
    logic [2:0] k1;
    for (int p = 0; p < P; p++) begin
      n2 = {to3[1], to3[4], 2'(p)};      // b3 b2 b1 b0
      k1 = {to3[0], to3[2], to3[3]};     // b4 b5 b6
      tw3[p] = twiddle(7'(7'(n2) * 7'(k1)));
    end
  end

  assign rot4_b2 = t4[4];

  assign psel[0] = !(!tp1[0] && tp1[3]);
  assign psel[1] = !(!tp2[0] && tp2[2]);
  assign psel[2] = !(!tp3[0] && tp3[1]);
  assign psel[3] = !(!tp4[0] && tp4[4]);

  assign out_valid = en && (fill == 6'(LAT));
  assign out_sop   = out_valid && (tout == 5'd0);

  // a frame start is only flagged on a valid output cycle, and the first valid output
  // is always the start of a frame
  a_sop_valid: assert property (@(posedge clk) disable iff (!rst_n) out_sop |-> out_valid);
  a_first_sop: assert property (@(posedge clk) disable iff (!rst_n)
                                (en && fill == 6'(LAT - 1)) |=> (!en || out_sop));
endmodule
