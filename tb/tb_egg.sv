// tb_egg: self-checking test of one BIRRD switch (EGG).
//
// Drives random 32-bit operand pairs through all four switch functions (pass, swap, add-left,
// add-right) and compares both outputs with the expected values computed here. The egg is
// combinational, so every check samples one delta after the inputs change.
module tb_egg;
  import feather_pkg::*;

  egg_fn_e fn;
  acc_t    a, b, y0, y1;
  int      checks = 0, failures = 0;

  egg dut (.fn, .a, .b, .y0, .y1);

  task automatic check(input acc_t got, input acc_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s fn=%0d a=%0d b=%0d got=%0d exp=%0d", what, fn, a, b, got, exp);
    end
  endtask

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  initial begin
    fn = EGG_PASS; a = '0; b = '0;
    for (int i = 0; i < 400; i++) begin
      fn = egg_fn_e'(i % 4);
      a  = acc_t'($urandom);
      b  = acc_t'($urandom);
      if (i % 7 == 0) b = -a;  // sums that cancel
      #1;
      case (fn)
        EGG_PASS:  begin check(y0, a, "pass y0");   check(y1, b, "pass y1");   end
        EGG_SWAP:  begin check(y0, b, "swap y0");   check(y1, a, "swap y1");   end
        EGG_ADD_L: begin check(y0, a + b, "addl y0"); check(y1, b, "addl y1"); end
        default:   begin check(y0, a, "addr y0");   check(y1, a + b, "addr y1"); end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
