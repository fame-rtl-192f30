// lane_unpack: splits rows of DP coefficients leaving a PE into 256-bit
// words for the write FIFOs of its HBM channels; the inverse of lane_pack
// with the same layout (word w = row bits [256w+255 : 256w], zero-padded;
// in beat k channel c carries word k*CH + c).
//
// A row is accepted (row_ready) when no row is held or the last beat of the
// held row is being pushed. A beat is pushed into all channels it uses in one cycle,
// when none of them is full. A row thus leaves in BEATS cycles when the
// FIFOs have room. Layout and channel assignment are this design's own.
module lane_unpack
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
  input  logic                      row_valid,
  output logic                      row_ready,
  input  coeff_t [DP-1:0]           row_data,
  input  logic [CH-1:0]             ch_full,
  output logic [CH-1:0]             ch_push,
  output logic [CH-1:0][HBM_W-1:0]  ch_data
);
  localparam int unsigned BW = (BEATS > 1) ? $clog2(BEATS) : 1;

  logic [WORDS*HBM_W-1:0] buf_q;
  logic                   full_q;    // a row is held in buf_q
  logic [BW-1:0]          beat;
  logic [CH-1:0]          need;
  logic                   go;

  always_comb begin
    for (int c = 0; c < CH; c++) begin
      need[c]    = (int'(beat) * CH + c) < WORDS;
      ch_data[c] = '0;
      // word positions are constants per (beat, channel): a small mux
      for (int k = 0; k < BEATS; k++)
        if (int'(beat) == k && k * CH + c < WORDS)
          ch_data[c] = buf_q[(k * CH + c) * HBM_W +: HBM_W];
    end
    go        = full_q && ((ch_full & need) == '0);
    ch_push   = go ? need : '0;
    row_ready = !full_q || (go && int'(beat) == BEATS - 1);
  end

  always_ff @(posedge clk) begin
    if (row_valid && row_ready) buf_q <= (WORDS*HBM_W)'(row_data);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0; full_q <= 1'b0;
    end else begin
      if (go) begin
        if (int'(beat) == BEATS - 1) begin
          beat <= '0; full_q <= 1'b0;
        end else begin
          beat <= beat + 1'b1;
        end
      end
      if (row_valid && row_ready) full_q <= 1'b1;
    end
  end
endmodule
