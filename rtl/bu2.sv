// bu2: parallel radix-2 butterfly between two paths (BU2 of stages 6 and 7).
//
// Both operands arrive in the same cycle on different paths, so a full complex
// butterfly (four real adders) is used: a' = (a + b)/2, b' = (a - b)/2, each part
// halved with rounding like every butterfly of this FFT. The outputs are registered:
// latency 1 cycle. The published architecture shows the block and its connections
// only; the scaling and the output register are this design's choices.
module bu2
  import msc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  cplx_t a,
  input  cplx_t b,
  output cplx_t y0,
  output cplx_t y1
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y0 <= '0; y1 <= '0;
    end else if (en) begin
      y0.re <= half_round({a.re[DW-1], a.re} + {b.re[DW-1], b.re});
      y0.im <= half_round({a.im[DW-1], a.im} + {b.im[DW-1], b.im});
      y1.re <= half_round({a.re[DW-1], a.re} - {b.re[DW-1], b.re});
      y1.im <= half_round({a.im[DW-1], a.im} - {b.im[DW-1], b.im});
    end
  end
endmodule
