// perm_ctrl: control unit of the permutation circuit ("Switch Config." and
// "AGU" in the paper's figure).
//
// A permutation of one limb (N coefficients = DEPTH rows of DP lanes) is
// described by a schedule of DEPTH control words held in a schedule memory,
// NSCHED schedules in all, written by the host through the cfg port. Word
// j of a schedule is {sw2, rd_addr, sw1}:
//   sw1     - switch settings of the input-side spatial network for input
//             row j (write step j),
//   rd_addr - address read from each of the DP temporal buffers for output
//             row j (read step j),
//   sw2     - switch settings of the output-side spatial network for
//             output row j.
// The AGU numbers write steps and read steps (0..DEPTH-1, restarted by
// start) and writes every buffer at address j on write step j; the
// schedule supplies the read side. Any permutation the network can realize
// (automorphism index maps psi_r, radix-2 NTT butterfly strides) is a
// schedule; the schedules are computed off-line by the host.
//
// Timing: wr_step or rd_step in cycle t reads the schedule memory; the
// word and the step number appear with ctl_wr / ctl_rd in cycle t+1.
// The paper says only that the control logic was redesigned to support
// Automorph; holding it in a schedule memory is this design's choice.
module perm_ctrl
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
  input  logic                  clk,
  input  logic                  rst_n,
  // schedule memory write port
  input  logic                  cfg_we,
  input  logic [SW+AW-1:0]      cfg_addr,   // {schedule, step}
  input  logic [WW-1:0]         cfg_data,
  // stepping
  input  logic                  start,      // restart step counters
  input  logic [SW-1:0]         sched,      // schedule in use (held)
  input  logic                  wr_step,
  input  logic                  rd_step,
  // control for the datapath, one cycle after the step
  output logic                  ctl_wr,
  output logic                  ctl_rd,
  output logic [AW-1:0]         ctl_wr_addr,
  output logic [NSW-1:0]        ctl_sw1,
  output logic [NSW-1:0]        ctl_sw2,
  output logic [DP-1:0][AW-1:0] ctl_rd_addr
);
  logic [WW-1:0] smem [NSCHED * DEPTH];
  logic [WW-1:0] word;
  logic [AW-1:0] wj, rj;

  always_ff @(posedge clk) begin
    if (cfg_we) smem[cfg_addr] <= cfg_data;
    if (wr_step || rd_step) word <= smem[{sched, (wr_step ? wj : rj)}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wj <= '0; rj <= '0; ctl_wr <= 1'b0; ctl_rd <= 1'b0; ctl_wr_addr <= '0;
    end else begin
      ctl_wr <= wr_step;
      ctl_rd <= rd_step && !wr_step;
      ctl_wr_addr <= wj;
      if (start) begin
        wj <= '0; rj <= '0;
      end else begin
        if (wr_step)               wj <= wj + 1'b1;
        else if (rd_step)          rj <= rj + 1'b1;
      end
    end
  end

  assign ctl_sw1     = word[NSW-1:0];
  assign ctl_rd_addr = word[NSW +: DP*AW];
  assign ctl_sw2     = word[NSW+DP*AW +: NSW];

  // the two phases of a permutation never overlap
  assert property (@(posedge clk) disable iff (!rst_n) !(wr_step && rd_step));
endmodule
