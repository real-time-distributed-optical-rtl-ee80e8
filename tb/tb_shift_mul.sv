// tb_shift_mul: exhaustive test of the shift-add multiplier. Every 8-bit
// activation is combined with every 4-bit weight code and compared with the
// product act * (+-2^(6-e)) (0 for e = 7) worked out by ordinary multiplication.
module tb_shift_mul;
  import dscnn_pkg::*;

  act_t   act;
  wcode_t code;
  prod_t  prod;
  int     checks = 0, failures = 0;

  shift_mul dut (.act, .code, .prod);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = -128; a < 128; a++) begin
      for (int c = 0; c < 16; c++) begin
        int exp_v, e;
        act  = act_t'(a);
        code = wcode_t'(c);
        #1;
        e = c % 8;
        exp_v = (e == 7) ? 0 : a * (2 ** (6 - e)) * ((c >= 8) ? -1 : 1);
        checks++;
        if (int'(prod) != exp_v) begin
          failures++;
          if (failures < 10) $display("mismatch act=%0d code=%0d got %0d exp %0d", a, c, prod, exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
