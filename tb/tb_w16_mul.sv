// tb_w16_mul: exhaustive check of the W16 constant multiplier. Every 12-bit input is
// multiplied by each of the three selectable constants and compared with the product
// formed by the simulator's own multiplier: 473 (sel 0), 362 (sel 1), 196 (sel 2).
module tb_w16_mul;
  import msc_pkg::*;

  data_t x;
  logic [1:0] sel;
  logic signed [DW+10:0] y;
  int checks = 0, failures = 0;
  int k [3] = '{473, 362, 196};

  w16_mul dut (.x, .sel, .y);

  initial begin
    for (int sv = 0; sv < 3; sv++) begin
      for (int v = -(1 << (DW-1)); v < (1 << (DW-1)); v++) begin
        x = data_t'(v);
        sel = 2'(sv);
        #1;
        checks++;
        if (int'(y) != v * k[sv]) begin
          failures++;
          if (failures < 10) $display("mismatch sel=%0d x=%0d y=%0d expected %0d", sv, v, y, v * k[sv]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
