// tb_msc_fft128: end-to-end test of the 128-point 4-path FFT at its default size.
//
// NFRAMES frames of random +-1 symbols (real and imaginary part each +-A, A = 1023,
// i.e. +-0.5 in 12-bit two's complement) are fed back to back in the input order of
// the architecture; from frame 4 on, the clock enable is dropped at random on 5 % of
// the cycles to stall the pipeline. Each output sample is compared with the exact DFT
// of its frame divided by 128, computed here in double precision, and must be within
// TOL LSB in real and imaginary part. The test also checks that the first output
// appears 38 enabled cycles after the first input, that out_sop marks each frame
// start, and it reports the signal-to-quantisation-noise ratio over all frames.
// It counts how often the named mechanisms happened (stall cycles, pass-through and
// recirculation in each of the four bit-exchange circuits, the 0.707 pre-scaling of
// the W8 rotators, the 473 and 196 settings of W16_MUL, the -j rotations of stage 2)
// and counts a failure for any that never did.
module tb_msc_fft128;
  import msc_pkg::*;

  localparam int  NFRAMES = 10000;
  localparam int  A       = 1023;
  localparam real TOL     = 8.0;
  localparam real PI      = 3.14159265358979;
  localparam int  LAT     = 38;

  logic  clk = 0, rst_n = 0, en = 0;
  cplx_t din [P], dout [P];
  logic  out_valid, out_sop;

  msc_fft128 dut (.clk, .rst_n, .en, .din, .dout, .out_valid, .out_sop);

  always #5 clk = ~clk;

  int   checks = 0, failures = 0;
  real  cw [N], sw [N];
  int   xr [4][N], xi [4][N];        // input frames, ring of 4
  real  Xr [4][N], Xi [4][N];        // reference spectra / 128
  real  sig_pow = 0.0, err_pow = 0.0, max_err = 0.0;
  int   n_in = 0, n_out = 0, en_cycles = 0, first_out = -1;
  int   n_stall = 0, n_w8scale = 0, n_jrot = 0;
  int   n_bypass [4], n_w16sel [3];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic make_frame(int f);
    for (int n = 0; n < N; n++) begin
      xr[f%4][n] = ($urandom_range(1) != 0) ? A : -A;
      xi[f%4][n] = ($urandom_range(1) != 0) ? A : -A;
    end
    for (int k = 0; k < N; k++) begin
      real sr, si;
      sr = 0.0; si = 0.0;
      for (int n = 0; n < N; n++) begin
        int m;
        m = (n * k) % N;                      // W^m = cos - j sin
        sr += real'(xr[f%4][n]) * cw[m] + real'(xi[f%4][n]) * sw[m];
        si += real'(xi[f%4][n]) * cw[m] - real'(xr[f%4][n]) * sw[m];
      end
      Xr[f%4][k] = sr / real'(N);
      Xi[f%4][k] = si / real'(N);
    end
  endtask

  // input index carried on path p at frame time t: (b2 b5 b4 b3 b6) = t, (b1 b0) = p
  function automatic int in_index(int t, int p);
    int b [7];
    b[2] = (t >> 4) & 1; b[5] = (t >> 3) & 1; b[4] = (t >> 2) & 1;
    b[3] = (t >> 1) & 1; b[6] = t & 1;
    b[1] = (p >> 1) & 1; b[0] = p & 1;
    return b[6]*64 + b[5]*32 + b[4]*16 + b[3]*8 + b[2]*4 + b[1]*2 + b[0];
  endfunction

  // frequency carried on path p at output frame time t: (b3 b6 b5 b4 b2) = t,
  // (b1 b0) = p, k = bit reversal of b6..b0
  function automatic int out_freq(int t, int p);
    int b [7];
    b[3] = (t >> 4) & 1; b[6] = (t >> 3) & 1; b[5] = (t >> 2) & 1;
    b[4] = (t >> 1) & 1; b[2] = t & 1;
    b[1] = (p >> 1) & 1; b[0] = p & 1;
    return b[0]*64 + b[1]*32 + b[2]*16 + b[3]*8 + b[4]*4 + b[5]*2 + b[6];
  endfunction

  initial begin
    foreach (n_bypass[i]) n_bypass[i] = 0;
    foreach (n_w16sel[i]) n_w16sel[i] = 0;
    for (int m = 0; m < N; m++) begin
      cw[m] = $cos(2.0 * PI * real'(m) / real'(N));
      sw[m] = $sin(2.0 * PI * real'(m) / real'(N));
    end
    foreach (din[p]) din[p] = '0;
    make_frame(0);
    repeat (3) @(negedge clk);
    rst_n = 1;

    while (n_out < NFRAMES * FRAME) begin
      int f, t;
      // drive
      f = n_in / FRAME;
      t = n_in % FRAME;
      en = !(f >= 4 && $urandom_range(19) == 0);
      for (int p = 0; p < P; p++) begin
        int n;
        n = in_index(t, p);
        din[p].re = (f < NFRAMES) ? data_t'(xr[f%4][n]) : '0;
        din[p].im = (f < NFRAMES) ? data_t'(xi[f%4][n]) : '0;
      end
      #1;
      // observe
      if (!en) n_stall++;
      if (en) begin
        for (int i = 0; i < 4; i++) if (!dut.psel[i]) n_bypass[i]++;
        if (dut.s[0] && dut.rot1[0]) n_w8scale++;
        if (dut.s[1] && dut.rot2) n_jrot++;
        if (dut.u_pe4_1.rot_q != 3'd0 && dut.u_pe4_1.rot_q != 3'd4) begin
          n_w16sel[dut.u_pe4_1.s3_3]++;
        end
      end
      check(out_valid == (en && en_cycles >= LAT), "out_valid timing");
      if (out_valid) begin
        int fo, to;
        if (first_out < 0) first_out = en_cycles;
        fo = n_out / FRAME;
        to = n_out % FRAME;
        check(out_sop == (to == 0), "out_sop position");
        for (int p = 0; p < P; p++) begin
          int k;
          real er, ei;
          k  = out_freq(to, p);
          er = real'(dout[p].re) - Xr[fo%4][k];
          ei = real'(dout[p].im) - Xi[fo%4][k];
          sig_pow += Xr[fo%4][k]**2 + Xi[fo%4][k]**2;
          err_pow += er**2 + ei**2;
          if (er < 0) er = -er;
          if (ei < 0) ei = -ei;
          if (er > max_err) max_err = er;
          if (ei > max_err) max_err = ei;
          checks++;
          if (er > TOL || ei > TOL) begin
            failures++;
            if (failures < 20)
              $display("frame %0d X[%0d]: got (%0d,%0d) expected (%f,%f)", fo, k,
                       dout[p].re, dout[p].im, Xr[fo%4][k], Xi[fo%4][k]);
          end
        end
        n_out++;
      end
      @(posedge clk);
      if (en) begin
        en_cycles++;
        n_in++;
        if (n_in % FRAME == 0 && n_in / FRAME < NFRAMES) make_frame(n_in / FRAME);
      end
      @(negedge clk);
    end

    check(first_out == LAT, "first output after 38 enabled cycles");
    $display("frames=%0d SQNR=%0.2f dB max_err=%0.2f LSB", NFRAMES,
             10.0 * $log10(sig_pow / err_pow), max_err);
    $display("mechanisms: stall=%0d bypass=%0d/%0d/%0d/%0d w8_prescale=%0d w16_473=%0d w16_362=%0d w16_196=%0d jrot=%0d",
             n_stall, n_bypass[0], n_bypass[1], n_bypass[2], n_bypass[3], n_w8scale,
             n_w16sel[0], n_w16sel[1], n_w16sel[2], n_jrot);
    check(n_stall > 0, "stall never happened");
    for (int i = 0; i < 4; i++) check(n_bypass[i] > 0, "bit-exchange bypass never happened");
    check(n_w8scale > 0, "W8 pre-scaling never happened");
    // stage 4 needs W16^1,3,5,7 only, so the 362 setting of W16_MUL is never selected
    check(n_w16sel[0] > 0 && n_w16sel[2] > 0, "a W16_MUL constant never used");
    check(n_jrot > 0, "-j rotation never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NFRAMES * FRAME * 2 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
