// perm_circuit: fully pipelined DP-to-DP streaming permutation circuit of a
// PE: input-side spatial network -> temporal buffers -> output-side
// spatial network, steered by perm_ctrl.
//
// It serves both permutation tasks of CKKS: the radix-2 butterfly
// reorderings of NTT/iNTT and the index map of Automorph. A permutation of
// one limb has two phases of DEPTH = N/DP steps each:
//   write phase: DEPTH rows enter on in_valid; row j passes the input-side
//                network with switch word sw1[j] and is written to every
//                buffer at address j;
//   read phase:  DEPTH rd_step pulses; step j reads buffer i at
//                rd_addr[j][i] and sends the gathered row through the
//                output-side network with sw2[j].
// Rows move at DP coefficients per cycle in each phase. Latency: 3 cycles
// from rd_step j to out_valid of output row j. The first read step may
// come no earlier than two cycles after the last write step (the last
// write reaches the buffers two cycles after its step). start restarts
// the step counters.
// The three subnetworks, their stage and switch counts, the DP buffers of
// N/DP words and the AGU are the paper's; a separate write and read phase
// per limb (rather than overlapping consecutive limbs in place) is this
// design's simplification.
module perm_circuit
  import fame_pkg::*;
#(
  parameter int unsigned DP     = 128,
  parameter int unsigned DEPTH  = 64,
  parameter int unsigned NSCHED = 4,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned SW    = $clog2(NSCHED),
  localparam int unsigned NSW   = $clog2(DP) * (DP / 2),
  localparam int unsigned WW    = 2 * NSW + DP * AW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [SW+AW-1:0] cfg_addr,
  input  logic [WW-1:0]    cfg_data,
  input  logic             start,
  input  logic [SW-1:0]    sched,
  input  logic             in_valid,
  input  coeff_t [DP-1:0]  din,
  input  logic             rd_step,
  output logic             out_valid,
  output coeff_t [DP-1:0]  dout
);
  logic                  ctl_wr, ctl_rd;
  logic [AW-1:0]         ctl_wr_addr, wa2;
  logic [NSW-1:0]        ctl_sw1, ctl_sw2, sw2_d;
  logic [DP-1:0][AW-1:0] ctl_rd_addr, wr_addr;
  coeff_t [DP-1:0]       din_d, s1_out, tb_out;
  logic                  s1_valid, tb_valid;

  perm_ctrl #(.DP(DP), .DEPTH(DEPTH), .NSCHED(NSCHED)) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .start, .sched,
    .wr_step(in_valid), .rd_step,
    .ctl_wr, .ctl_rd, .ctl_wr_addr, .ctl_sw1, .ctl_sw2, .ctl_rd_addr
  );

  always_ff @(posedge clk) begin
    din_d <= din;
    wa2   <= ctl_wr_addr;
    sw2_d <= ctl_sw2;
  end

  spatial_perm_net #(.DP(DP), .OUTPUT_SIDE(1'b0)) u_spatial_in (
    .clk, .rst_n, .in_valid(ctl_wr), .din(din_d), .sw(ctl_sw1),
    .out_valid(s1_valid), .dout(s1_out)
  );

  always_comb
    for (int i = 0; i < DP; i++) wr_addr[i] = wa2;

  temporal_perm #(.DP(DP), .DEPTH(DEPTH)) u_temporal (
    .clk, .rst_n, .wr_en(s1_valid), .wr_addr, .wr_data(s1_out),
    .rd_en(ctl_rd), .rd_addr(ctl_rd_addr), .rd_valid(tb_valid), .rd_data(tb_out)
  );

  spatial_perm_net #(.DP(DP), .OUTPUT_SIDE(1'b1)) u_spatial_out (
    .clk, .rst_n, .in_valid(tb_valid), .din(tb_out), .sw(sw2_d),
    .out_valid, .dout
  );
endmodule
