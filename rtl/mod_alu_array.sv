// mod_alu_array: DP modular ALUs working in lock-step on one row of DP
// coefficients per cycle (one row = DP lanes of one limb).
//
// All lanes share the operation, the modulus q and the Barrett constant mu
// (one row always belongs to one RNS limb). Rows are accepted every cycle
// and leave ALU_LAT cycles later with out_valid. The paper gives the lane
// count dp (128 in FAME-S/M, 256 in FAME-L) and the lane contents; sharing
// q/op across lanes is this design's choice.
// Lint note: all lanes receive the same in_valid, so their out_valid bits
// are equal; only lane 0's is used.
module mod_alu_array
  import fame_pkg::*;
#(
  parameter int unsigned DP = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  alu_op_e         op,
  input  coeff_t [DP-1:0] a,
  input  coeff_t [DP-1:0] b,
  input  coeff_t [DP-1:0] c,
  input  coeff_t          q,
  input  mu_t             mu,
  output logic            out_valid,
  output coeff_t [DP-1:0] y
);
  logic [DP-1:0] v;

  for (genvar i = 0; i < DP; i++) begin : g_lane
    mod_alu u_alu (
      .clk, .rst_n, .in_valid, .op, .a(a[i]), .b(b[i]), .c(c[i]), .q, .mu,
      .out_valid(v[i]), .y(y[i])
    );
  end

  assign out_valid = v[0];
endmodule
