// mod_addsub: modular adder/subtractor, the adder half of a modular ALU.
//
// Computes (a + b) mod q when sub = 0 and (a - b) mod q when sub = 1, for
// a, b already reduced below q. One conditional correction (subtract q
// after an add, add q after a borrow) keeps the result in [0, q).
// Purely combinational; the caller registers the result. The paper names
// an adder "configurable for addition or subtraction"; the one-correction
// structure is the usual choice for reduced operands.
// Lint note: bit 54 of sum_red is only a borrow and is not needed, since
// the comparison selects between sum and sum_red.
module mod_addsub
  import fame_pkg::*;
(
  input  coeff_t a,
  input  coeff_t b,
  input  coeff_t q,
  input  logic   sub,
  output coeff_t y
);
  logic [COEFF_W:0] sum, diff, sum_red;

  always_comb begin
    sum     = {1'b0, a} + {1'b0, b};
    sum_red = sum - {1'b0, q};
    diff    = {1'b0, a} - {1'b0, b};
    if (sub) begin
      // borrow out of bit COEFF_W means a < b
      y = diff[COEFF_W] ? coeff_t'(diff[COEFF_W-1:0] + q) : diff[COEFF_W-1:0];
    end else begin
      y = (sum >= {1'b0, q}) ? sum_red[COEFF_W-1:0] : sum[COEFF_W-1:0];
    end
  end
endmodule
