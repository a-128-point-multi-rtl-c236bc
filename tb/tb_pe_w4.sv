// tb_pe_w4: self-checking test of the PE with the -j rotator.
// Random pairs stream in back to back with a random exponent k per pair (presented on
// the pair's second cycle; other cycles carry random junk on rot). Two cycles after a
// pair's first sample the sum (x0 + x1)/2 must appear, one cycle later the difference
// (x0 - x1)/2 times (-j)^k, computed here with real arithmetic; a deviation of at most
// 2 LSB is accepted for the rotated sample. This also checks the 2-cycle latency.
module tb_pe_w4;
  import msc_pkg::*;

  localparam int NPAIR = 4000;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0, en = 1, s = 0;
  cplx_t din, dout;
  logic rot;
  int checks = 0, failures = 0;
  int xr [2*NPAIR], xi [2*NPAIR];
  int kk [NPAIR];

  pe_w4 dut (.clk, .rst_n, .en, .s, .din, .rot, .dout);

  always #5 clk = ~clk;

  function automatic int hr(int v);   // halve, round half up
    return (v + 1) >>> 1;
  endfunction

  task automatic check(int got, real expv, real tol, string what);
    checks++;
    if ((real'(got) - expv) > tol || (expv - real'(got)) > tol) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %f", what, got, expv);
    end
  endtask

  initial begin
    for (int i = 0; i < 2*NPAIR; i++) begin
      xr[i] = $urandom_range(2000) - 1000;
      xi[i] = $urandom_range(2000) - 1000;
    end
    for (int j = 0; j < NPAIR; j++) kk[j] = $urandom_range(1);
    din = '0; rot = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2*NPAIR + 4; c++) begin
      s = c[0];
      if (c < 2*NPAIR) begin
        din.re = data_t'(xr[c]);
        din.im = data_t'(xi[c]);
      end else din = '0;
      rot = (s && c < 2*NPAIR) ? 1'(kk[c/2]) : 1'($urandom_range(1));
      #1;
      if (c >= 2 && c[0] == 0 && c/2 - 1 < NPAIR) begin
        int j;
        j = c/2 - 1;
        check(dout.re, real'(hr(xr[2*j] + xr[2*j+1])), 0.0, "sum re");
        check(dout.im, real'(hr(xi[2*j] + xi[2*j+1])), 0.0, "sum im");
      end
      if (c >= 3 && c[0] == 1 && (c-3)/2 < NPAIR) begin
        int j;
        real a, b, ang;
        j = (c - 3) / 2;
        a = real'(hr(xr[2*j] - xr[2*j+1]));
        b = real'(hr(xi[2*j] - xi[2*j+1]));
        ang = -2.0 * PI * real'(kk[j]) / 4.0;
        check(dout.re, a * $cos(ang) - b * $sin(ang), 0.01, "rot re");
        check(dout.im, a * $sin(ang) + b * $cos(ang), 0.01, "rot im");
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2*NPAIR + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
