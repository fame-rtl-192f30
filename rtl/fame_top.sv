// fame_top: the FAME accelerator: NUM_PE processing elements joined by the
// inter-PE bus, and NUM_CH asynchronous FIFO pairs towards the HBM.
//
// Default configuration is FAME-S of the paper: 2 PEs of dp = 128 lanes,
// a scratchpad of 4 banks x 256 rows x 128 x 54 bit (864 KB) per PE, and
// ring degree N = 2^13 (Set-A), so one limb is 64 rows and the temporal
// permutation buffers hold 64 coefficients each.
//
// HBM side (clock hbm_clk): channel c has a read FIFO, filled by the HBM
// controller's AXI read data (rdf_push/rdf_wdata/rdf_full), and a write
// FIFO, drained towards AXI write data (wrf_pop/wrf_rdata/wrf_empty). The
// AXI masters and the HBM controller are outside this design. Channels
// [p*CH, (p+1)*CH) with CH = NUM_CH/NUM_PE belong to PE p: its lane_pack
// turns their words into rows for LOAD, and its lane_unpack turns STORE rows
// into words.
// Accelerator side (clock clk): each PE takes instructions (instr_t) with a
// valid/ready handshake, permutation schedules through cfg_*, and reports
// idle, err and its dispatch stalls.
// The structure (PEs with ALU array, scratchpad, permutation circuit and
// control; a dp-wide inter-PE bus; 32 x 256-bit FIFO pairs to HBM) follows
// the paper; the channel split between PEs is this design's choice.
// Lint notes: rx_src of the bus is not used, because a RECV names no
// source (the host program pairs SENDs and RECVs). rst_n and hbm_rst_n
// are flagged as used both as asynchronous resets and synchronously; the
// synchronous use is only the "disable iff" of assertions.
module fame_top
  import fame_pkg::*;
#(
  parameter int unsigned NUM_PE     = 2,
  parameter int unsigned DP         = 128,
  parameter int unsigned BANK_DEPTH = 256,
  parameter int unsigned POLY_N     = 8192,
  parameter int unsigned NSCHED     = 4,
  parameter int unsigned NUM_CH     = 32,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned CH        = NUM_CH / NUM_PE,
  localparam int unsigned PDEPTH    = POLY_N / DP,
  localparam int unsigned PAW       = $clog2(PDEPTH),
  localparam int unsigned SW        = $clog2(NSCHED),
  localparam int unsigned NSW       = $clog2(DP) * (DP / 2),
  localparam int unsigned WW        = 2 * NSW + DP * PAW
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            hbm_clk,
  input  logic                            hbm_rst_n,
  // HBM side of the FIFO pairs
  input  logic [NUM_CH-1:0]               rdf_push,
  input  logic [NUM_CH-1:0][HBM_W-1:0]    rdf_wdata,
  output logic [NUM_CH-1:0]               rdf_full,
  input  logic [NUM_CH-1:0]               wrf_pop,
  output logic [NUM_CH-1:0][HBM_W-1:0]    wrf_rdata,
  output logic [NUM_CH-1:0]               wrf_empty,
  // per-PE instruction streams
  input  logic [NUM_PE-1:0]               instr_valid,
  output logic [NUM_PE-1:0]               instr_ready,
  input  instr_t [NUM_PE-1:0]             instr,
  // per-PE permutation schedule memory
  input  logic [NUM_PE-1:0]               cfg_we,
  input  logic [NUM_PE-1:0][SW+PAW-1:0]   cfg_addr,
  input  logic [NUM_PE-1:0][WW-1:0]       cfg_data,
  // status
  output logic [NUM_PE-1:0]               pe_idle,
  output logic [NUM_PE-1:0]               pe_err,
  output logic [NUM_PE-1:0]               pe_stall_bank,
  output logic [NUM_PE-1:0]               pe_stall_busy
);
  // kernel side of the FIFOs
  logic [NUM_CH-1:0]            rdf_pop, rdf_empty, wrf_push, wrf_full;
  logic [NUM_CH-1:0][HBM_W-1:0] rdf_rdata, wrf_wdata;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    async_fifo #(.W(HBM_W), .DEPTH(FIFO_DEPTH)) u_rdf (
      .wclk(hbm_clk), .wrst_n(hbm_rst_n), .push(rdf_push[c]), .wdata(rdf_wdata[c]),
      .full(rdf_full[c]),
      .rclk(clk), .rrst_n(rst_n), .pop(rdf_pop[c]), .rdata(rdf_rdata[c]),
      .empty(rdf_empty[c])
    );
    async_fifo #(.W(HBM_W), .DEPTH(FIFO_DEPTH)) u_wrf (
      .wclk(clk), .wrst_n(rst_n), .push(wrf_push[c]), .wdata(wrf_wdata[c]),
      .full(wrf_full[c]),
      .rclk(hbm_clk), .rrst_n(hbm_rst_n), .pop(wrf_pop[c]), .rdata(wrf_rdata[c]),
      .empty(wrf_empty[c])
    );
  end

  // inter-PE bus
  logic   [NUM_PE-1:0]          tx_valid, tx_ready, rx_valid, rx_ready;
  coeff_t [NUM_PE-1:0][DP-1:0]  tx_data;
  logic   [NUM_PE-1:0][3:0]     tx_dst;
  coeff_t [DP-1:0]              rx_data;
  logic   [((NUM_PE > 1) ? $clog2(NUM_PE) : 1)-1:0] rx_src;

  inter_pe_bus #(.NUM_PE(NUM_PE), .DP(DP)) u_bus (
    .clk, .rst_n, .tx_valid, .tx_ready, .tx_data, .tx_dst,
    .rx_valid, .rx_ready, .rx_data, .rx_src
  );

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    logic            in_valid, in_ready, out_valid, out_ready;
    coeff_t [DP-1:0] in_data, out_data;

    lane_pack #(.DP(DP), .CH(CH)) u_pack (
      .clk, .rst_n,
      .ch_valid(~rdf_empty[p*CH +: CH]), .ch_data(rdf_rdata[p*CH +: CH]),
      .ch_pop(rdf_pop[p*CH +: CH]),
      .row_valid(in_valid), .row_ready(in_ready), .row_data(in_data)
    );

    lane_unpack #(.DP(DP), .CH(CH)) u_unpack (
      .clk, .rst_n,
      .row_valid(out_valid), .row_ready(out_ready), .row_data(out_data),
      .ch_full(wrf_full[p*CH +: CH]), .ch_push(wrf_push[p*CH +: CH]),
      .ch_data(wrf_wdata[p*CH +: CH])
    );

    pe #(.DP(DP), .BANK_DEPTH(BANK_DEPTH), .POLY_N(POLY_N), .NSCHED(NSCHED)) u_pe (
      .clk, .rst_n,
      .instr_valid(instr_valid[p]), .instr_ready(instr_ready[p]), .instr(instr[p]),
      .cfg_we(cfg_we[p]), .cfg_addr(cfg_addr[p]), .cfg_data(cfg_data[p]),
      .hbm_in_valid(in_valid), .hbm_in_ready(in_ready), .hbm_in_data(in_data),
      .hbm_out_valid(out_valid), .hbm_out_ready(out_ready), .hbm_out_data(out_data),
      .bus_tx_valid(tx_valid[p]), .bus_tx_ready(tx_ready[p]),
      .bus_tx_data(tx_data[p]), .bus_tx_dst(tx_dst[p]),
      .bus_rx_valid(rx_valid[p]), .bus_rx_ready(rx_ready[p]), .bus_rx_data(rx_data),
      .idle(pe_idle[p]), .err(pe_err[p]),
      .stall_bank(pe_stall_bank[p]), .stall_busy(pe_stall_busy[p])
    );
  end
endmodule
