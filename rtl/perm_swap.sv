// perm_swap: serial bit-dimension permutation that exchanges bit 0 and bit K of the
// time index of a stream of complex samples.
//
// A delay line of L = 2^K - 1 samples sits between two 2:1 muxes, numbered as in the
// published architecture: the input mux feeds the line with the new sample (1) or
// with the line's own output (0); the output mux takes the line's output (1) or the
// new sample (0). sel comes from the controller and is 0 exactly for the input
// samples whose time index has bit 0 = 0 and bit K = 1: such a sample leaves at once,
// while the sample leaving the line at that moment (bit 0 = 1, bit K = 0) is sent
// round the line once more. Every other sample is delayed by L. The result is the
// index with bits 0 and K exchanged, L cycles later, and frames may follow each other
// without gaps. Latency: L cycles.
module perm_swap
  import msc_pkg::*;
#(
  parameter int K = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  sel,
  input  cplx_t din,
  output cplx_t dout
);
  localparam int L = (1 << K) - 1;

  cplx_t line [L];
  cplx_t line_in;

  assign line_in = sel ? din : line[L-1];
  assign dout    = sel ? line[L-1] : din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < L; i++) line[i] <= '0;
    end else if (en) begin
      line[0] <= line_in;
      for (int i = 1; i < L; i++) line[i] <= line[i-1];
    end
  end
endmodule
