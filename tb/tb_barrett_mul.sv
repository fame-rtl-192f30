// tb_barrett_mul: streams random products through the Barrett multiplier,
// one per cycle with random gaps, and compares each result with (a*b) % q
// computed at full width. Also checks the 4-cycle latency and corner
// operands (0, 1, q-1) on moduli near both ends of [2^53, 2^54).
module tb_barrett_mul;
  import fame_pkg::*;
  logic   clk = 0, rst_n = 0;
  logic   in_valid = 0, out_valid;
  coeff_t a, b, q, y;
  mu_t    mu;
  int     checks = 0, failures = 0, cyc = 0;
  coeff_t exp_q[$];
  int     tin_q[$];

  barrett_mul dut (.clk, .rst_n, .in_valid, .a, .b, .q, .mu, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic coeff_t rnd54();
    return {$urandom, $urandom} & ((64'd1 << COEFF_W) - 1);
  endfunction

  function automatic mu_t calc_mu(coeff_t tq);
    logic [2*COEFF_W+1:0] num;
    num = '0; num[2*COEFF_W] = 1'b1;
    return mu_t'(num / tq);
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        coeff_t e; int t;
        e = exp_q.pop_front(); t = tin_q.pop_front();
        if (y !== e) begin failures++; $display("FAIL y=%h exp=%h", y, e); end
        if (cyc - t != MUL_LAT) begin failures++; $display("FAIL latency %0d", cyc - t); end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      coeff_t tq, ta, tb_;
      logic [2*COEFF_W-1:0] p;
      @(negedge clk);
      case (i % 3)
        0: tq = rnd54() | (coeff_t'(1) << (COEFF_W - 1)) | 1;
        1: tq = (coeff_t'(1) << (COEFF_W - 1)) | 1 | (rnd54() & 64'hFF);
        default: tq = ((coeff_t'(1) << COEFF_W) - 1) - (rnd54() & 64'hFE);
      endcase
      ta = rnd54() % tq; tb_ = rnd54() % tq;
      if (i % 5 == 0) ta = tq - 1;
      if (i % 10 == 0) tb_ = tq - 1;
      if (i % 17 == 0) tb_ = 1;
      if (i % 19 == 0) ta = 0;
      in_valid = ($urandom % 4) != 0;
      a = ta; b = tb_; q = tq; mu = calc_mu(tq);
      if (in_valid) begin
        p = (2*COEFF_W)'(ta) * (2*COEFF_W)'(tb_);
        exp_q.push_back(coeff_t'(p % (2*COEFF_W)'(tq)));
        tin_q.push_back(cyc + 1);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
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
