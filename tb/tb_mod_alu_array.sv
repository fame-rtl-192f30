// tb_mod_alu_array: streams rows of random lanes through a 16-lane ALU
// array, one operation and modulus per row, and checks every lane against
// % arithmetic, plus the ALU_LAT latency of each row.
module tb_mod_alu_array;
  import fame_pkg::*;
  import tb_model_pkg::*;
  localparam int DP = 16;
  logic            clk = 0, rst_n = 0, in_valid = 0, out_valid;
  alu_op_e         op;
  coeff_t [DP-1:0] a, b, c, y;
  coeff_t          q;
  mu_t             mu;
  int              checks = 0, failures = 0, cyc = 0;
  u64_t            exp_q[$];
  int              tin_q[$];

  mod_alu_array #(.DP(DP)) dut (.clk, .rst_n, .in_valid, .op, .a, .b, .c, .q, .mu, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    int t;
    t = tin_q.pop_front();
    checks++;
    if (cyc - t != ALU_LAT) begin failures++; $display("FAIL latency %0d", cyc - t); end
    for (int i = 0; i < DP; i++) begin
      u64_t e;
      e = exp_q.pop_front();
      checks++;
      if (64'(y[i]) != e) begin failures++; $display("FAIL lane %0d y=%h exp=%h", i, y[i], e); end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 500; r++) begin
      u64_t tq;
      int k;
      @(negedge clk);
      tq = rnd_q(); k = $urandom % 5;
      in_valid = ($urandom % 4) != 0;
      op = alu_op_e'(k); q = tq; mu = calc_mu(tq);
      for (int i = 0; i < DP; i++) begin
        u64_t ta, tb_, tc, e;
        ta = rnd54() % tq; tb_ = rnd54() % tq; tc = rnd54() % tq;
        a[i] = ta; b[i] = tb_; c[i] = tc;
        case (k)
          0: e = addmod(ta, tb_, tq);
          1: e = submod(ta, tb_, tq);
          2: e = mulmod(ta, tb_, tq);
          3: e = addmod(tc, mulmod(ta, tb_, tq), tq);
          default: e = submod(tc, mulmod(ta, tb_, tq), tq);
        endcase
        if (in_valid) exp_q.push_back(e);
      end
      if (in_valid) tin_q.push_back(cyc + 1);
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
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
