// tb_mod_addsub: checks the modular adder/subtractor against % arithmetic
// on random 54-bit moduli and operands, plus the corner values 0 and q-1.
module tb_mod_addsub;
  import fame_pkg::*;
  coeff_t a, b, q, y;
  logic   sub;
  int     checks = 0, failures = 0;

  mod_addsub dut (.a, .b, .q, .sub, .y);

  task automatic check(coeff_t ta, coeff_t tb_, coeff_t tq, logic ts);
    logic [COEFF_W+1:0] exp;
    a = ta; b = tb_; q = tq; sub = ts;
    #1;
    exp = ts ? ({2'b0, ta} + {2'b0, tq} - {2'b0, tb_}) % {2'b0, tq}
             : ({2'b0, ta} + {2'b0, tb_}) % {2'b0, tq};
    checks++;
    if (y !== exp[COEFF_W-1:0]) begin
      failures++;
      $display("FAIL a=%h b=%h q=%h sub=%0d y=%h exp=%h", ta, tb_, tq, ts, y, exp);
    end
  endtask

  function automatic coeff_t rnd54();
    return {$urandom, $urandom} & ((64'd1 << COEFF_W) - 1);
  endfunction

  initial begin
    for (int i = 0; i < 2000; i++) begin
      coeff_t tq, ta, tb_;
      tq = rnd54() | (coeff_t'(1) << (COEFF_W - 1)) | 1;
      ta = rnd54() % tq; tb_ = rnd54() % tq;
      if (i % 7 == 0) ta = tq - 1;
      if (i % 11 == 0) tb_ = tq - 1;
      if (i % 13 == 0) ta = 0;
      check(ta, tb_, tq, i[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
