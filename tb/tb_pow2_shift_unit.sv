// tb_pow2_shift_unit -- exhaustive check of the power-of-two shift
// multiplier: every 8-bit activation
// against every 4-bit term code, compared with an integer reference
// (-1)^sign * act * 2^(6-e), zero for e = 7.
module tb_pow2_shift_unit;
  import flightnn_pkg::*;

  logic signed [ACT_W-1:0]  act;
  wcode_t                   code;
  logic signed [PROD_W-1:0] prod;
  int checks = 0, failures = 0;

  pow2_shift_unit dut (.act, .code, .prod);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expv;
    for (int a = -128; a < 128; a++) begin
      for (int c = 0; c < 16; c++) begin
        act  = ACT_W'(a);
        code = wcode_t'(c);
        #1;
        if (code.e == 3'd7) expv = 0;
        else expv = (code.sign ? -1 : 1) * a * (1 << (6 - int'(code.e)));
        checks++;
        if (int'(prod) != expv) begin
          failures++;
          if (failures < 10) $display("mismatch act=%0d code=%h got %0d exp %0d", a, c, prod, expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
