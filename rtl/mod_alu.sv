// mod_alu: one modular ALU lane = one modular multiplier + one modular adder.
//
// Operations (fame_pkg::alu_op_e): ADD a+b, SUB a-b, MUL a*b, MAC c+a*b,
// MSB c-a*b, all mod q. The operands enter the Barrett multiplier; for
// ADD/SUB the multiplier is bypassed by a delay line carrying b, so every
// operation has the same latency ALU_LAT = MUL_LAT + 1 and results leave in
// issue order. The adder stage is mod_addsub followed by a register.
// The paper gives the ALU's contents (one adder configurable for add or
// subtract, one Barrett multiplier); the operation set that combines them
// (MAC/MSB serve DiagIP, KeyIP and BaseConv accumulations and the two
// halves of an NTT butterfly) is this design's own.
module mod_alu
  import fame_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  alu_op_e op,
  input  coeff_t  a,
  input  coeff_t  b,
  input  coeff_t  c,
  input  coeff_t  q,
  input  mu_t     mu,
  output logic    out_valid,
  output coeff_t  y
);
  coeff_t  prod;
  logic    prod_v;
  coeff_t  a_d [MUL_LAT];
  coeff_t  b_d [MUL_LAT];
  coeff_t  c_d [MUL_LAT];
  coeff_t  q_d [MUL_LAT];
  alu_op_e op_d [MUL_LAT];
  coeff_t  p_sel, x_sel, sum;
  logic    v_q;

  barrett_mul u_mul (
    .clk, .rst_n, .in_valid, .a, .b, .q, .mu,
    .out_valid(prod_v), .y(prod)
  );

  // operands travel alongside the multiplier pipeline
  always_ff @(posedge clk) begin
    a_d[0] <= a; b_d[0] <= b; c_d[0] <= c; q_d[0] <= q; op_d[0] <= op;
    for (int i = 1; i < MUL_LAT; i++) begin
      a_d[i] <= a_d[i-1]; b_d[i] <= b_d[i-1]; c_d[i] <= c_d[i-1];
      q_d[i] <= q_d[i-1]; op_d[i] <= op_d[i-1];
    end
  end

  always_comb begin
    unique case (op_d[MUL_LAT-1])
      ALU_ADD, ALU_SUB: begin p_sel = b_d[MUL_LAT-1]; x_sel = a_d[MUL_LAT-1]; end
      ALU_MUL:          begin p_sel = prod;           x_sel = '0;             end
      default:          begin p_sel = prod;           x_sel = c_d[MUL_LAT-1]; end
    endcase
  end

  mod_addsub u_add (
    .a(x_sel), .b(p_sel), .q(q_d[MUL_LAT-1]),
    .sub(op_d[MUL_LAT-1] inside {ALU_SUB, ALU_MSB}), .y(sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= 1'b0;
    else        v_q <= prod_v;
  end
  always_ff @(posedge clk) y <= sum;
  assign out_valid = v_q;
endmodule
