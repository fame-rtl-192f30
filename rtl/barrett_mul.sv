// barrett_mul: pipelined Barrett modular multiplier, y = a * b mod q.
//
// The modulus is a 54-bit RNS prime, q in [2^53, 2^54), and mu is the
// precomputed constant floor(2^108 / q) supplied with it (the host computes
// it once per limb). With k = 54 the classic Barrett estimate is used:
//   x  = a * b                      (stage 1)
//   t  = ((x >> 53) * mu) >> 55     (stage 2)
//   r  = x - t * q   (mod 2^56)     (stage 3, r < 3q)
//   y  = r reduced by up to two conditional subtractions of q (stage 4)
// Latency is MUL_LAT = 4 cycles, one result per cycle; en advances the
// whole pipeline (a valid bit travels with the data). The paper states a
// pipelined Barrett design and 54-bit primes; the stage split is this
// design's own.
// Lint note: some bits are unused by the algorithm itself: x2 above bit 55
// (the remainder fits in 56 bits), t2 below bit 55 (dropped by the shift)
// and the top two bits of r_b (zero after the corrections).
module barrett_mul
  import fame_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coeff_t a,
  input  coeff_t b,
  input  coeff_t q,
  input  mu_t    mu,
  output logic   out_valid,
  output coeff_t y
);
  localparam int unsigned PW = 2 * COEFF_W;          // 108-bit product

  logic [PW-1:0]          x1, x2;
  logic [MU_W+MU_W-1:0]   t2;                         // 110-bit product
  logic [MU_W-1:0]        t2s;
  logic [COEFF_W+1:0]     r3, r_a, r_b;
  coeff_t                 q1, q2, q3;
  mu_t                    mu1;
  logic [3:0]             v;

  assign t2s = t2[MU_W+MU_W-1 -: MU_W];               // >> 55

  always_comb begin
    r_a = (r3 >= {2'b0, q3}) ? r3 - {2'b0, q3} : r3;
    r_b = (r_a >= {2'b0, q3}) ? r_a - {2'b0, q3} : r_a;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    // stage 1
    x1 <= PW'(a) * PW'(b);
    q1 <= q;
    mu1 <= mu;
    // stage 2
    t2 <= (MU_W+MU_W)'(x1[PW-1:COEFF_W-1]) * (MU_W+MU_W)'(mu1);
    x2 <= x1;
    q2 <= q1;
    // stage 3
    r3  <= x2[COEFF_W+1:0] - (COEFF_W+2)'(t2s * q2);
    q3  <= q2;
    // stage 4
    y   <= r_b[COEFF_W-1:0];
  end

  assign out_valid = v[3];
endmodule
