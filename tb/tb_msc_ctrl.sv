// tb_msc_ctrl: self-checking test of the control unit. The clock enable is dropped at
// random; the test keeps its own count of enabled cycles and, from the bit labels of
// the architecture (which index bit each time bit carries at each stage), derives
// what every control output must be:
//   - the commutator phase of each PE is bit 0 of that PE's input time;
//   - stage 1 rotates the pair by W8^(2*b5 + b4), stage 2 by -j when b4 = 1;
//   - the stage-3 twiddle of path p is W128^((b3 b2 b1 b0) * (b4 b5 b6)), checked
//     against 1024*cos / 1024*sin of that angle within half an LSB;
//   - stage 4 uses W16^(4*b2 + p) (Table I), so the controller gives b2;
//   - each bit-exchange select is 0 only for time bit 0 = 0 and time bit K = 1;
//   - out_valid rises after 38 enabled cycles and out_sop repeats every 32.
module tb_msc_ctrl;
  import msc_pkg::*;

  localparam int  NCYC = 3000;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0, en = 0;
  logic [4:0] s;
  logic [1:0] rot1;
  logic       rot2;
  tw_t        tw3 [P];
  logic       rot4_b2;
  logic [3:0] psel;
  logic       out_valid, out_sop;
  int checks = 0, failures = 0;

  msc_ctrl dut (.clk, .rst_n, .en, .s, .rot1, .rot2, .tw3, .rot4_b2, .psel, .out_valid, .out_sop);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int tb(int c, int delay, int bit_no);   // time bit at a point
    return (((c - delay) % 32 + 32) % 32 >> bit_no) & 1;
  endfunction

  initial begin
    int c;
    c = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NCYC; i++) begin
      en = ($urandom_range(7) != 0);
      #1;
      if (en) begin
        // commutator phases: stage inputs at delays 0, 9, 14, 17, 34
        check(s == {1'(tb(c,34,0)), 1'(tb(c,17,0)), 1'(tb(c,14,0)), 1'(tb(c,9,0)), 1'(tb(c,0,0))}, "phase");
        // stage 1 time = (b2 b5 b4 b3 b6): W8^(2 b5 + b4)
        if (tb(c,0,0) == 1) check(rot1 == 2'(2*tb(c,0,3) + tb(c,0,2)), "rot1");
        // stage 2 time = (b2 b6 b4 b3 b5): -j when b4 = 1
        if (tb(c,9,0) == 1) check(rot2 == 1'(tb(c,9,2)), "rot2");
        // stage 3 output time = (b2 b6 b5 b3 b4)
        for (int p = 0; p < P; p++) begin
          int n2, k1, e;
          real cr, sr;
          n2 = 8*tb(c,16,1) + 4*tb(c,16,4) + p;
          k1 = 4*tb(c,16,0) + 2*tb(c,16,2) + tb(c,16,3);
          e  = (n2 * k1) % 128;
          cr = 1024.0 * $cos(2.0 * PI * real'(e) / 128.0);
          sr = 1024.0 * $sin(2.0 * PI * real'(e) / 128.0);
          check((real'(tw3[p].c) - cr) <= 0.5 && (cr - real'(tw3[p].c)) <= 0.5 &&
                (real'(tw3[p].s) - sr) <= 0.5 && (sr - real'(tw3[p].s)) <= 0.5, "tw3");
        end
        // stage 4 time = (b2 b6 b5 b4 b3): W16^(4 b2 + p)
        if (tb(c,17,0) == 1) begin
          int b2;
          b2 = tb(c,17,4);
          check(rot4_b2 == 1'(b2), "stage-4 b2");
        end
        // bit-exchange selects: after stage 1 (delay 2, K 3), 2 (11, 2), 3 (16, 1), 4 (19, 4)
        check(psel[0] == !(tb(c,2,0) == 0 && tb(c,2,3) == 1), "psel0");
        check(psel[1] == !(tb(c,11,0) == 0 && tb(c,11,2) == 1), "psel1");
        check(psel[2] == !(tb(c,16,0) == 0 && tb(c,16,1) == 1), "psel2");
        check(psel[3] == !(tb(c,19,0) == 0 && tb(c,19,4) == 1), "psel3");
        check(out_valid == (c >= 38), "out_valid");
        check(out_sop == (c >= 38 && (c - 38) % 32 == 0), "out_sop");
      end else begin
        check(!out_valid && !out_sop, "no output while stalled");
      end
      @(posedge clk);
      if (en) c++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
