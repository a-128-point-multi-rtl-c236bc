// tb_bu2: self-checking test of the parallel butterfly. Random operand pairs are
// applied every cycle; one cycle later y0 must equal (a + b)/2 and y1 (a - b)/2 for
// real and imaginary parts (halving rounds half up). Clock-enable gaps are inserted
// at random; while en is low the outputs must hold.
module tb_bu2;
  import msc_pkg::*;

  localparam int NCYC = 5000;

  logic clk = 0, rst_n = 0, en = 1;
  cplx_t a, b, y0, y1;
  int checks = 0, failures = 0;
  int er0, ei0, er1, ei1;

  bu2 dut (.clk, .rst_n, .en, .a, .b, .y0, .y1);

  always #5 clk = ~clk;

  function automatic int hr(int v);
    return (v + 1) >>> 1;
  endfunction

  task automatic check(int got, int want, string what);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, want);
    end
  endtask

  initial begin
    a = '0; b = '0;
    er0 = 0; ei0 = 0; er1 = 0; ei1 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCYC; c++) begin
      en = ($urandom_range(9) != 0);
      a.re = data_t'($urandom_range(4095) - 2048);
      a.im = data_t'($urandom_range(4095) - 2048);
      b.re = data_t'($urandom_range(4095) - 2048);
      b.im = data_t'($urandom_range(4095) - 2048);
      @(posedge clk);
      if (en) begin
        er0 = hr(int'(a.re) + int'(b.re)); ei0 = hr(int'(a.im) + int'(b.im));
        er1 = hr(int'(a.re) - int'(b.re)); ei1 = hr(int'(a.im) - int'(b.im));
      end
      #1;
      check(int'(y0.re), er0, "y0.re");
      check(int'(y0.im), ei0, "y0.im");
      check(int'(y1.re), er1, "y1.re");
      check(int'(y1.im), ei1, "y1.im");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2*NCYC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
