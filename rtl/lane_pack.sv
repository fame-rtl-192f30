// lane_pack: packs 256-bit words from the read FIFOs of one PE's HBM
// channels into rows of DP coefficients (DP x 54 bits) for the scratchpad.
//
// A row is WORDS = ceil(DP*54/256) words long (27 for DP = 128): coefficient
// i of the row occupies row bits [54i+53 : 54i], and word w holds row bits
// [256w+255 : 256w] (the last word is zero-padded). The words of a row are
// spread over the CH channels: in beat k, channel c carries word k*CH + c,
// so a row takes BEATS = ceil(WORDS/CH) beats (2 for CH = 16). A beat is
// taken, popping all channels it uses, when each of them has a word and
// the row register is free. Output is valid/ready. The packing into
// dp-wide lanes is the paper's; the word layout and channel assignment are
// this design's own and set how the host lays out data in HBM.
module lane_pack
  import fame_pkg::*;
#(
  parameter int unsigned DP    = 128,
  parameter int unsigned CH    = 16,
  localparam int unsigned ROW_W = DP * COEFF_W,
  localparam int unsigned WORDS = (ROW_W + HBM_W - 1) / HBM_W,
  localparam int unsigned BEATS = (WORDS + CH - 1) / CH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [CH-1:0]             ch_valid,   // FIFO not empty
  input  logic [CH-1:0][HBM_W-1:0]  ch_data,
  output logic [CH-1:0]             ch_pop,
  output logic                      row_valid,
  input  logic                      row_ready,
  output coeff_t [DP-1:0]           row_data
);
  localparam int unsigned BW = (BEATS > 1) ? $clog2(BEATS) : 1;

  logic [WORDS*HBM_W-1:0] acc;
  logic [BW-1:0]          beat;
  logic [CH-1:0]          need;
  logic                   take;

  always_comb begin
    for (int c = 0; c < CH; c++) need[c] = (int'(beat) * CH + c) < WORDS;
    take   = ((ch_valid & need) == need) && (!row_valid || row_ready);
    ch_pop = take ? need : '0;
  end

  // word positions are constants per (beat, channel), so no wide shifter
  always_ff @(posedge clk) begin
    for (int k = 0; k < BEATS; k++)
      for (int c = 0; c < CH; c++)
        if (take && int'(beat) == k && k * CH + c < WORDS)
          acc[(k * CH + c) * HBM_W +: HBM_W] <= ch_data[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0; row_valid <= 1'b0;
    end else begin
      if (row_valid && row_ready) row_valid <= 1'b0;
      if (take) begin
        if (int'(beat) == BEATS - 1) begin
          beat <= '0; row_valid <= 1'b1;
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end
  end

  assign row_data = acc[ROW_W-1:0];
endmodule
