// scratchpad: multi-banked scratchpad of a PE, NBANKS = 4 dual-port banks,
// each DEPTH rows of DP coefficients (one row = DP consecutive coefficients
// of one limb).
//
// Every bank has one read port and one write port. NRD read clients and NWR
// write clients (ALU operand streams, the permutation circuit, the HBM and
// inter-PE transfers) each name a bank and a row; each bank's read port and
// write port serve whichever client names that bank in that cycle, so up to
// four reads and four writes proceed concurrently on different banks. The
// PE controller guarantees that no two clients use the same bank port in
// the same cycle (checked by assertions); when they do anyway, the lowest
// numbered client wins. Read data return one cycle after the request on
// the requesting client's rd_data. A read and a write of the same row in
// one cycle return the old word.
// The paper gives four dual-port banks of width dp with configurable depth
// (FAME-S: 864 KB per PE = 4 x 256 rows x 128 x 54 bit); the client
// multiplexing is this design's own. Banks 2 and 3 map to URAM in the
// larger configurations; as plain arrays here that is left to synthesis.
module scratchpad
  import fame_pkg::*;
#(
  parameter int unsigned DP    = 128,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned NRD   = 6,
  parameter int unsigned NWR   = 4,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic   [NRD-1:0]        rd_en,
  input  logic   [NRD-1:0][1:0]   rd_bank,
  input  logic   [NRD-1:0][AW-1:0] rd_addr,
  output coeff_t [NRD-1:0][DP-1:0] rd_data,
  input  logic   [NWR-1:0]        wr_en,
  input  logic   [NWR-1:0][1:0]   wr_bank,
  input  logic   [NWR-1:0][AW-1:0] wr_addr,
  input  coeff_t [NWR-1:0][DP-1:0] wr_data
);
  coeff_t [NBANKS-1:0][DP-1:0] bank_q;
  logic   [NRD-1:0][1:0]       rd_bank_d;

  for (genvar k = 0; k < NBANKS; k++) begin : g_bank
    coeff_t [DP-1:0] mem [DEPTH];
    logic            re, we;
    logic [AW-1:0]   ra, wa;
    coeff_t [DP-1:0] wd;
    int unsigned     nr, nw;

    always_comb begin
      re = 1'b0; ra = '0; we = 1'b0; wa = '0; wd = '0; nr = 0; nw = 0;
      for (int c = NRD - 1; c >= 0; c--)
        if (rd_en[c] && rd_bank[c] == 2'(k)) begin
          re = 1'b1; ra = rd_addr[c]; nr++;
        end
      for (int c = NWR - 1; c >= 0; c--)
        if (wr_en[c] && wr_bank[c] == 2'(k)) begin
          we = 1'b1; wa = wr_addr[c]; wd = wr_data[c]; nw++;
        end
    end

    always_ff @(posedge clk) begin
      if (re) bank_q[k] <= mem[ra];
      if (we) mem[wa] <= wd;
    end

    assert property (@(posedge clk) disable iff (!rst_n) nr <= 1)
      else $error("scratchpad: read port conflict on bank %0d", k);
    assert property (@(posedge clk) disable iff (!rst_n) nw <= 1)
      else $error("scratchpad: write port conflict on bank %0d", k);
  end

  always_ff @(posedge clk) rd_bank_d <= rd_bank;

  always_comb
    for (int c = 0; c < NRD; c++) rd_data[c] = bank_q[rd_bank_d[c]];
endmodule
