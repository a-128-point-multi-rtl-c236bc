// tb_perm_swap: self-checking test of the bit-exchange permutation for all four sizes
// used in the FFT (K = 3, 2, 1, 4, i.e. delays 7, 3, 1, 15). A numbered stream runs
// through each instance without gaps for many frames; the select is driven from the
// input time index as the controller does. At output cycle c the instance must show
// the input sample whose index is c - L with bits 0 and K exchanged, which checks both
// the reordering and the latency L = 2^K - 1.
module tb_perm_swap;
  import msc_pkg::*;

  localparam int NCYC = 2000;
  localparam int KS [4] = '{3, 2, 1, 4};

  logic clk = 0, rst_n = 0, en = 1;
  cplx_t din;
  logic  sel [4];
  cplx_t dout [4];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < 4; g++) begin : g_dut
    perm_swap #(.K(KS[g])) dut (.clk, .rst_n, .en, .sel(sel[g]), .din, .dout(dout[g]));
  end

  always #5 clk = ~clk;

  function automatic int swap_bits(int v, int k);
    int b0, bk;
    b0 = (v >> 0) & 1;
    bk = (v >> k) & 1;
    return (v & ~((1 << k) | 1)) | (b0 << k) | bk;
  endfunction

  initial begin
    din = '0;
    foreach (sel[g]) sel[g] = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCYC; c++) begin
      din.re = data_t'(c & 12'h7ff);
      din.im = data_t'((c >> 11) & 12'h7ff);
      for (int g = 0; g < 4; g++) sel[g] = !(((c & 1) == 0) && (((c >> KS[g]) & 1) == 1));
      #1;
      for (int g = 0; g < 4; g++) begin
        int L, q, want, got;
        L = (1 << KS[g]) - 1;
        q = c - L;
        if (q >= 0) begin
          want = swap_bits(q, KS[g]);
          got  = int'(dout[g].re) | (int'(dout[g].im) << 11);
          checks++;
          if (got != want) begin
            failures++;
            if (failures < 10) $display("K=%0d cycle %0d: got %0d expected %0d", KS[g], c, got, want);
          end
        end
      end
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
