// temporal_perm: temporal permutation subnetwork, DP dual-port buffers of
// DEPTH = N/DP coefficients each.
//
// Buffer i takes lane i of the input-side spatial network. A write step
// stores the row into every buffer at the address given by the address
// generation unit (AGU); a read step reads every buffer at its own address,
// so each output row gathers coefficients that arrived in different cycles.
// Both ports can be used in the same cycle; a read of the address being
// written returns the old word (read-first). Read data appear one cycle
// after rd_en. Write and read addresses come from perm_ctrl.
// The paper gives the buffer count (dp) and depth (N/dp); port timing is
// this design's choice.
module temporal_perm
  import fame_pkg::*;
#(
  parameter int unsigned DP    = 128,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [DP-1:0][AW-1:0]  wr_addr,
  input  coeff_t [DP-1:0]        wr_data,
  input  logic                   rd_en,
  input  logic [DP-1:0][AW-1:0]  rd_addr,
  output logic                   rd_valid,
  output coeff_t [DP-1:0]        rd_data
);
  for (genvar i = 0; i < DP; i++) begin : g_buf
    coeff_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (rd_en) rd_data[i] <= mem[rd_addr[i]];
      if (wr_en) mem[wr_addr[i]] <= wr_data[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end
endmodule
