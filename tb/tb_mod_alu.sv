// tb_mod_alu: drives random operations (ADD, SUB, MUL, MAC, MSB) with random
// moduli through one modular ALU and checks every result against full-width
// % arithmetic and the fixed ALU_LAT latency.
module tb_mod_alu;
  import fame_pkg::*;
  import tb_model_pkg::*;
  logic    clk = 0, rst_n = 0, in_valid = 0, out_valid;
  alu_op_e op;
  coeff_t  a, b, c, q, y;
  mu_t     mu;
  int      checks = 0, failures = 0, cyc = 0;
  u64_t    exp_q[$];
  int      tin_q[$];
  int      nop[5] = '{default: 0};

  mod_alu dut (.clk, .rst_n, .in_valid, .op, .a, .b, .c, .q, .mu, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    u64_t e; int t;
    checks++;
    e = exp_q.pop_front(); t = tin_q.pop_front();
    if (64'(y) != e) begin failures++; $display("FAIL y=%h exp=%h", y, e); end
    if (cyc - t != ALU_LAT) begin failures++; $display("FAIL latency %0d", cyc - t); end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      u64_t tq, ta, tb_, tc, e;
      int k;
      @(negedge clk);
      tq = rnd_q(); ta = rnd54() % tq; tb_ = rnd54() % tq; tc = rnd54() % tq;
      if (i % 9 == 0) ta = tq - 1;
      if (i % 7 == 0) tb_ = tq - 1;
      k = $urandom % 5;
      in_valid = ($urandom % 5) != 0;
      op = alu_op_e'(k); a = ta; b = tb_; c = tc; q = tq; mu = calc_mu(tq);
      case (k)
        0: e = addmod(ta, tb_, tq);
        1: e = submod(ta, tb_, tq);
        2: e = mulmod(ta, tb_, tq);
        3: e = addmod(tc, mulmod(ta, tb_, tq), tq);
        default: e = submod(tc, mulmod(ta, tb_, tq), tq);
      endcase
      if (in_valid) begin exp_q.push_back(e); tin_q.push_back(cyc + 1); nop[k]++; end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (nop[k] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
