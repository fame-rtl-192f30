// spatial_perm_net: one spatial permutation subnetwork of the streaming
// permutation circuit: log2(DP) stages of DP/2 2x2 switches.
//
// OUTPUT_SIDE = 0 is the input-side network of the circuit: a column of
// DP/2 switches on neighbouring lanes (2i, 2i+1) whose upper outputs feed an
// upper DP/2 x DP/2 network and whose lower outputs feed a lower one,
// recursively. OUTPUT_SIDE = 1 is its mirror, the output-side network: the
// upper and lower DP/2 networks come first and switch i then joins output i
// of each onto lanes 2i and 2i+1. Both are drawn in the paper's figure of
// the permutation circuit; the recursion is unrolled here stage by stage.
//
// Control: sw[s*DP/2 + j] = 1 crosses switch j of stage s (stage 0 is the
// one next to the inputs). The stages are combinational and the output is
// registered: latency 1 cycle, one row of DP lanes per cycle. Data and
// control of a row are presented in the same cycle.
module spatial_perm_net
  import fame_pkg::*;
#(
  parameter int unsigned DP          = 128,
  parameter bit          OUTPUT_SIDE = 1'b0,
  localparam int unsigned LOG        = $clog2(DP),
  localparam int unsigned NSW        = LOG * (DP / 2)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  coeff_t [DP-1:0] din,
  input  logic [NSW-1:0]  sw,
  output logic            out_valid,
  output coeff_t [DP-1:0] dout
);
  coeff_t [DP-1:0] lvl [LOG+1];

  assign lvl[0] = din;

  for (genvar s = 0; s < LOG; s++) begin : g_stage
    // group size: shrinks on the input side, grows on the output side
    localparam int unsigned G = OUTPUT_SIDE ? (2 << s) : (DP >> s);
    localparam int unsigned H = G / 2;
    for (genvar g = 0; g < DP / G; g++) begin : g_grp
      for (genvar i = 0; i < H; i++) begin : g_sw
        localparam int unsigned SWI  = s * (DP / 2) + g * H + i;
        // switch inputs and outputs, as lane numbers
        localparam int unsigned IN0  = OUTPUT_SIDE ? g * G + i     : g * G + 2 * i;
        localparam int unsigned IN1  = OUTPUT_SIDE ? g * G + H + i : g * G + 2 * i + 1;
        localparam int unsigned OUT0 = OUTPUT_SIDE ? g * G + 2 * i     : g * G + i;
        localparam int unsigned OUT1 = OUTPUT_SIDE ? g * G + 2 * i + 1 : g * G + H + i;
        assign lvl[s+1][OUT0] = sw[SWI] ? lvl[s][IN1] : lvl[s][IN0];
        assign lvl[s+1][OUT1] = sw[SWI] ? lvl[s][IN0] : lvl[s][IN1];
      end
    end
  end

  always_ff @(posedge clk) dout <= lvl[LOG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
