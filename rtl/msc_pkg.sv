// msc_pkg: types and constants shared by the 128-point 4-path serial-commutator FFT.
//
// DW is the data word length of every real part in the datapath (12 bits, as in the
// published implementation). A complex sample travels as a packed struct {re, im}.
// TW_FRAC is the number of fractional bits of the general twiddle coefficients used by
// the stage-3 complex multiplier (1.0 = 1024); that precision is this design's choice.
// The quarter-wave cosine table holds round(1024*cos(2*pi*i/128)) for i = 0..32; any
// 128th root of unity W^e = cos - j*sin is rebuilt from it with the quadrant symmetry
// W^(32q+r) = (-j)^q * W^r.
package msc_pkg;

  localparam int DW      = 12;   // data word length
  localparam int N       = 128;  // FFT size
  localparam int P       = 4;    // parallel paths
  localparam int FRAME   = N / P; // cycles per frame on each path
  localparam int TW_W    = 12;   // general twiddle coefficient width
  localparam int TW_FRAC = 10;   // fractional bits of the general twiddle

  typedef logic signed [DW-1:0]   data_t;
  typedef logic signed [TW_W-1:0] coef_t;

  typedef struct packed {
    data_t re;
    data_t im;
  } cplx_t;

  // Twiddle W_128^e = c - j*s, both scaled by 2^TW_FRAC.
  typedef struct packed {
    coef_t c;
    coef_t s;
  } tw_t;

  // round(1024*cos(2*pi*i/128)), i = 0..32
  function automatic coef_t cos_q(input logic [5:0] i);
    case (i)
      6'd0:  return 12'sd1024;  6'd1:  return 12'sd1023;  6'd2:  return 12'sd1019;
      6'd3:  return 12'sd1013;  6'd4:  return 12'sd1004;  6'd5:  return 12'sd993;
      6'd6:  return 12'sd980;   6'd7:  return 12'sd964;   6'd8:  return 12'sd946;
      6'd9:  return 12'sd926;   6'd10: return 12'sd903;   6'd11: return 12'sd878;
      6'd12: return 12'sd851;   6'd13: return 12'sd822;   6'd14: return 12'sd792;
      6'd15: return 12'sd759;   6'd16: return 12'sd724;   6'd17: return 12'sd688;
      6'd18: return 12'sd650;   6'd19: return 12'sd610;   6'd20: return 12'sd569;
      6'd21: return 12'sd526;   6'd22: return 12'sd483;   6'd23: return 12'sd438;
      6'd24: return 12'sd392;   6'd25: return 12'sd345;   6'd26: return 12'sd297;
      6'd27: return 12'sd249;   6'd28: return 12'sd200;   6'd29: return 12'sd150;
      6'd30: return 12'sd100;   6'd31: return 12'sd50;    default: return 12'sd0;
    endcase
  endfunction

  // W_128^e as (c, s) with W = c - j*s.
  function automatic tw_t twiddle(input logic [6:0] e);
    coef_t c0, s0;
    tw_t   w;
    c0 = cos_q({1'b0, e[4:0]});
    s0 = cos_q(6'd32 - {1'b0, e[4:0]});
    case (e[6:5])
      2'd0: begin w.c = c0;  w.s = s0;  end
      2'd1: begin w.c = -s0; w.s = c0;  end
      2'd2: begin w.c = -c0; w.s = -s0; end
      default: begin w.c = s0; w.s = -c0; end
    endcase
    return w;
  endfunction

  // Arithmetic right shift by one with round-half-up; the argument is one bit wider
  // than a data word (the sum or difference of two words).
  function automatic data_t half_round(input logic signed [DW:0] x);
    logic signed [DW:0] t;
    t = (x + (DW+1)'(1)) >>> 1;
    return t[DW-1:0];
  endfunction

endpackage
