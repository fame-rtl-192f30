// inter_pe_bus: the inter-PE bus, DP coefficients wide, that carries limbs
// between PEs (e.g. the intermediate ciphertext limbs that one PE passes to
// the other after each HLT of step 2 so the product can be accumulated).
//
// Each PE offers a row with tx_valid and a destination PE number tx_dst.
// One row crosses the bus per cycle. Among the senders whose destination is
// ready to take a row, a round-robin arbiter picks one; that row appears at
// the destination as rx_valid with rx_src, and tx_ready of the chosen sender
// is the destination's rx_ready. The arbiter is combinational with a
// registered round-robin pointer, so a row crosses in the cycle it is
// granted. The bus width (dp) and its purpose are the paper's; the
// arbitration is this design's own. A receiver is expected to take rows
// from one sender at a time.
module inter_pe_bus
  import fame_pkg::*;
#(
  parameter int unsigned NUM_PE = 2,
  parameter int unsigned DP     = 128,
  localparam int unsigned PW    = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic   [NUM_PE-1:0]          tx_valid,
  output logic   [NUM_PE-1:0]          tx_ready,
  input  coeff_t [NUM_PE-1:0][DP-1:0]  tx_data,
  input  logic   [NUM_PE-1:0][3:0]     tx_dst,
  output logic   [NUM_PE-1:0]          rx_valid,
  input  logic   [NUM_PE-1:0]          rx_ready,
  output coeff_t [DP-1:0]              rx_data,
  output logic   [PW-1:0]              rx_src
);
  logic [PW-1:0] rr;       // sender with the highest priority this cycle
  logic [PW-1:0] gnt;
  logic          any;
  logic [NUM_PE-1:0] elig;

  always_comb begin
    for (int p = 0; p < NUM_PE; p++)
      elig[p] = tx_valid[p] && (int'(tx_dst[p]) < NUM_PE) && rx_ready[tx_dst[p][PW-1:0]];
    any = 1'b0; gnt = '0;
    for (int k = NUM_PE - 1; k >= 0; k--) begin
      logic [PW-1:0] p;
      p = PW'((int'(rr) + k) % NUM_PE);
      if (elig[p]) begin any = 1'b1; gnt = p; end
    end
    tx_ready = '0;
    rx_valid = '0;
    if (any) begin
      tx_ready[gnt] = 1'b1;
      rx_valid[tx_dst[gnt][PW-1:0]] = 1'b1;
    end
    rx_data = tx_data[gnt];
    rx_src  = gnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   rr <= '0;
    else if (any) rr <= PW'((int'(gnt) + 1) % NUM_PE);
  end

  for (genvar p = 0; p < NUM_PE; p++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      tx_valid[p] |-> (int'(tx_dst[p]) < NUM_PE) && (int'(tx_dst[p]) != p))
      else $error("inter_pe_bus: PE %0d sends to invalid PE %0d", p, tx_dst[p]);
  end
endmodule
