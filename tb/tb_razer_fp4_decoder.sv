// tb_razer_fp4_decoder -- exhaustive test of the FP4-RaZeR element decoder.
// Sweeps every FP4 code, every offset register value, both select values and
// both metadata signs for the two-offset (weight) variant, and every code,
// offset and sign for the one-offset (activation) variant, comparing against
// the real-valued reference model. Also checks the worked example of the
// format: OF = 1010 (-1.0), sign 1 gives -5.0.
`timescale 1ns/1ps
module tb_razer_fp4_decoder;
  import razer_pkg::*;
  import razer_ref_pkg::*;

  int checks = 0, failures = 0;

  fp4_t                 code;
  logic [1:0][OF_W-1:0] of2;
  logic [0:0][OF_W-1:0] of1;
  logic                 sel, sign;
  rzr_t                 val2, val1;

  razer_fp4_decoder #(.NUM_OF(2)) dut2 (.code_i(code), .of_i(of2), .sel_i(sel),
                                        .sign_i(sign), .val_o(val2));
  razer_fp4_decoder #(.NUM_OF(1)) dut1 (.code_i(code), .of_i(of1), .sel_i(sel),
                                        .sign_i(sign), .val_o(val1));

  task automatic check(input real got, input real exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s code=%b of=%h/%h sel=%0d sign=%0d got %f exp %f",
                 what, code, of2[0], of2[1], sel, sign, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 16; c++)
      for (int o0 = 0; o0 < 16; o0++)
        for (int o1 = 0; o1 < 16; o1 += 3)
          for (int s = 0; s < 4; s++) begin
            code = 4'(c); of2[0] = 4'(o0); of2[1] = 4'(o1);
            sel = s[0]; sign = s[1]; of1[0] = 4'(o0);
            #1;
            check(half_units(val2.sign, val2.mag),
                  rzr_value(4'(c), sel ? 4'(o1) : 4'(o0), sign), "weight");
            check(half_units(val1.sign, val1.mag),
                  rzr_value(4'(c), 4'(o0), sign), "act");
          end
    // Worked example: 1010 = -1.0, 6.0 - 1.0 = 5.0, negative sign -> -5.0.
    code = 4'b0000; of2[0] = 4'b1010; of2[1] = 4'b0100; sel = 1'b0; sign = 1'b1;
    #1 check(half_units(val2.sign, val2.mag), -5.0, "example -5");
    sel = 1'b1; sign = 1'b0;
    #1 check(half_units(val2.sign, val2.mag), 8.0, "example +8");
    // Negative zero is not remapped.
    code = 4'b1000;
    #1 check(half_units(val2.sign, val2.mag), 0.0, "negative zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
