// pe: one processing element of FAME: a modular ALU array of DP lanes, a
// four-bank scratchpad, a DP-to-DP permutation circuit and the control that
// sequences them.
//
// Every datapath moves whole rows of DP coefficients per cycle. The host
// streams instructions (fame_pkg::instr_t) into pe_ctrl, which hands them
// to four engines that run concurrently on disjoint scratchpad banks:
//   alu_engine   - ALU instructions through mod_alu_array (3 reads, 1 write)
//   perm_engine  - PERM instructions through perm_circuit (1 read, 1 write)
//   xfer_engine  - LOAD/STORE against the HBM lane streams
//   xfer_engine  - SEND/RECV against the inter-PE bus
// All CKKS sub-operations of the memory-optimized HLT datapath (NTT/iNTT
// butterflies, BaseConv, Automorph, KeyIP, DiagIP, additions) are sequences
// of these instructions; the host program chooses the limb-outer,
// rotation-inner loop order.
// Scratchpad read clients: 0-2 ALU a/b/c, 3 permutation, 4 HBM, 5 bus;
// write clients: 0 ALU, 1 permutation, 2 HBM, 3 bus.
// The composition (ALU array, scratchpad, permutation circuit and control,
// all dp wide) is the paper's; the engines and instruction set are this
// design's own.
module pe
  import fame_pkg::*;
#(
  parameter int unsigned DP         = 128,
  parameter int unsigned BANK_DEPTH = 256,
  parameter int unsigned POLY_N     = 8192,
  parameter int unsigned NSCHED     = 4,
  localparam int unsigned AW        = $clog2(BANK_DEPTH),
  localparam int unsigned PDEPTH    = POLY_N / DP,
  localparam int unsigned PAW       = $clog2(PDEPTH),
  localparam int unsigned SW        = $clog2(NSCHED),
  localparam int unsigned NSW       = $clog2(DP) * (DP / 2),
  localparam int unsigned WW        = 2 * NSW + DP * PAW
) (
  input  logic            clk,
  input  logic            rst_n,
  // instructions
  input  logic            instr_valid,
  output logic            instr_ready,
  input  instr_t          instr,
  // permutation schedule memory
  input  logic            cfg_we,
  input  logic [SW+PAW-1:0] cfg_addr,
  input  logic [WW-1:0]   cfg_data,
  // rows from / to the HBM lanes
  input  logic            hbm_in_valid,
  output logic            hbm_in_ready,
  input  coeff_t [DP-1:0] hbm_in_data,
  output logic            hbm_out_valid,
  input  logic            hbm_out_ready,
  output coeff_t [DP-1:0] hbm_out_data,
  // inter-PE bus
  output logic            bus_tx_valid,
  input  logic            bus_tx_ready,
  output coeff_t [DP-1:0] bus_tx_data,
  output logic [3:0]      bus_tx_dst,
  input  logic            bus_rx_valid,
  output logic            bus_rx_ready,
  input  coeff_t [DP-1:0] bus_rx_data,
  // status
  output logic            idle,
  output logic            err,
  output logic            stall_bank,
  output logic            stall_busy
);
  localparam int unsigned NRD = 6;
  localparam int unsigned NWR = 4;

  logic [3:0] start, done;
  instr_t     cmd;

  logic   [NRD-1:0]          rd_en;
  logic   [NRD-1:0][1:0]     rd_bank;
  logic   [NRD-1:0][AW-1:0]  rd_addr;
  coeff_t [NRD-1:0][DP-1:0]  rd_data;
  logic   [NWR-1:0]          wr_en;
  logic   [NWR-1:0][1:0]     wr_bank;
  logic   [NWR-1:0][AW-1:0]  wr_addr;
  coeff_t [NWR-1:0][DP-1:0]  wr_data;

  pe_ctrl u_ctrl (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr, .start, .cmd, .done,
    .idle, .err, .stall_bank, .stall_busy
  );

  scratchpad #(.DP(DP), .DEPTH(BANK_DEPTH), .NRD(NRD), .NWR(NWR)) u_spm (
    .clk, .rst_n, .rd_en, .rd_bank, .rd_addr, .rd_data,
    .wr_en, .wr_bank, .wr_addr, .wr_data
  );

  // ---------------- ALU ----------------
  logic    alu_in_valid, alu_out_valid;
  alu_op_e alu_op;
  coeff_t  alu_q;
  mu_t     alu_mu;

  alu_engine #(.AW(AW)) u_alu_eng (
    .clk, .rst_n, .start(start[ENG_ALU]), .cmd, .done(done[ENG_ALU]),
    .rd_en(rd_en[2:0]), .rd_bank(rd_bank[2:0]), .rd_addr(rd_addr[2:0]),
    .alu_in_valid, .alu_op, .alu_q, .alu_mu, .alu_out_valid,
    .wr_en(wr_en[0]), .wr_bank(wr_bank[0]), .wr_addr(wr_addr[0])
  );

  mod_alu_array #(.DP(DP)) u_alu (
    .clk, .rst_n, .in_valid(alu_in_valid), .op(alu_op),
    .a(rd_data[0]), .b(rd_data[1]), .c(rd_data[2]), .q(alu_q), .mu(alu_mu),
    .out_valid(alu_out_valid), .y(wr_data[0])
  );

  // ---------------- permutation ----------------
  logic          pc_start, pc_in_valid, pc_rd_step, pc_out_valid;
  logic [SW-1:0] pc_sched;

  perm_engine #(.AW(AW), .DEPTH(PDEPTH), .NSCHED(NSCHED)) u_perm_eng (
    .clk, .rst_n, .start(start[ENG_PERM]), .cmd, .done(done[ENG_PERM]),
    .rd_en(rd_en[3]), .rd_bank(rd_bank[3]), .rd_addr(rd_addr[3]),
    .pc_start, .pc_sched, .pc_in_valid, .pc_rd_step, .pc_out_valid,
    .wr_en(wr_en[1]), .wr_bank(wr_bank[1]), .wr_addr(wr_addr[1])
  );

  perm_circuit #(.DP(DP), .DEPTH(PDEPTH), .NSCHED(NSCHED)) u_perm (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .start(pc_start), .sched(pc_sched), .in_valid(pc_in_valid),
    .din(rd_data[3]), .rd_step(pc_rd_step),
    .out_valid(pc_out_valid), .dout(wr_data[1])
  );

  // ---------------- HBM transfers ----------------
  logic [3:0] hbm_dst_unused;

  xfer_engine #(.DP(DP), .AW(AW)) u_hbm_eng (
    .clk, .rst_n, .start(start[ENG_HBM]), .cmd, .done(done[ENG_HBM]),
    .in_valid(hbm_in_valid), .in_ready(hbm_in_ready), .in_data(hbm_in_data),
    .out_valid(hbm_out_valid), .out_ready(hbm_out_ready), .out_data(hbm_out_data),
    .out_dst(hbm_dst_unused),
    .rd_en(rd_en[4]), .rd_bank(rd_bank[4]), .rd_addr(rd_addr[4]), .rd_data(rd_data[4]),
    .wr_en(wr_en[2]), .wr_bank(wr_bank[2]), .wr_addr(wr_addr[2]), .wr_data(wr_data[2])
  );

  // ---------------- inter-PE bus transfers ----------------
  xfer_engine #(.DP(DP), .AW(AW)) u_bus_eng (
    .clk, .rst_n, .start(start[ENG_BUS]), .cmd, .done(done[ENG_BUS]),
    .in_valid(bus_rx_valid), .in_ready(bus_rx_ready), .in_data(bus_rx_data),
    .out_valid(bus_tx_valid), .out_ready(bus_tx_ready), .out_data(bus_tx_data),
    .out_dst(bus_tx_dst),
    .rd_en(rd_en[5]), .rd_bank(rd_bank[5]), .rd_addr(rd_addr[5]), .rd_data(rd_data[5]),
    .wr_en(wr_en[3]), .wr_bank(wr_bank[3]), .wr_addr(wr_addr[3]), .wr_data(wr_data[3])
  );
endmodule
