// tb_pe_tw: self-checking test of the PE with the general complex rotator.
// Random pairs stream in back to back; every output cycle gets a random twiddle
// W128^e. Two cycles after a pair's first sample the sum (x0 + x1)/2 times the twiddle
// of that cycle must appear, one cycle later the difference (x0 - x1)/2 times its
// twiddle, computed here with real arithmetic (at most 2 LSB deviation accepted).
// This also checks the 2-cycle latency.
module tb_pe_tw;
  import msc_pkg::*;

  localparam int NPAIR = 4000;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0, en = 1, s = 0;
  cplx_t din, dout;
  tw_t tw;
  int e;
  int checks = 0, failures = 0;
  int xr [2*NPAIR], xi [2*NPAIR];

  pe_tw dut (.clk, .rst_n, .en, .s, .din, .tw, .dout);

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

  task automatic rot_check(real a, real b, string what);
    real ang;
    ang = -2.0 * PI * real'(e) / 128.0;
    check(dout.re, a * $cos(ang) - b * $sin(ang), 2.0, {what, " re"});
    check(dout.im, a * $sin(ang) + b * $cos(ang), 2.0, {what, " im"});
  endtask

  initial begin
    for (int i = 0; i < 2*NPAIR; i++) begin
      xr[i] = $urandom_range(2000) - 1000;
      xi[i] = $urandom_range(2000) - 1000;
    end
    din = '0; tw = twiddle(7'd0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2*NPAIR + 4; c++) begin
      s = c[0];
      if (c < 2*NPAIR) begin
        din.re = data_t'(xr[c]);
        din.im = data_t'(xi[c]);
      end else din = '0;
      e = $urandom_range(127);
      tw = twiddle(7'(e));
      #1;
      if (c >= 2 && c[0] == 0 && c/2 - 1 < NPAIR) begin
        int j;
        j = c/2 - 1;
        rot_check(real'(hr(xr[2*j] + xr[2*j+1])), real'(hr(xi[2*j] + xi[2*j+1])), "sum");
      end
      if (c >= 3 && c[0] == 1 && (c-3)/2 < NPAIR) begin
        int j;
        j = (c - 3) / 2;
        rot_check(real'(hr(xr[2*j] - xr[2*j+1])), real'(hr(xi[2*j] - xi[2*j+1])), "dif");
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
